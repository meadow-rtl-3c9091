// bram_sdp: on-chip block RAM with one write port and NRD read ports.
//
// Used for the weight, input and output BRAMs of the accelerator. Words are
// one 64-byte PE row (512 bits); DEPTH = 16384 words makes the paper's 1 MB
// per BRAM. Reads are synchronous (data one cycle after the address), as in
// FPGA block RAM; each read port is an independent copy of the read logic,
// which an FPGA builds from replicated or dual-ported BRAM.
//
// From the paper: three BRAMs of 1 MB each. This design's choices: the
// 512-bit word, the port count per BRAM and read-during-write returning the
// old word.
module bram_sdp #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned NRD   = 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [NRD-1:0]           re,
  input  logic [NRD-1:0][$clog2(DEPTH)-1:0] raddr,
  output logic [NRD-1:0][WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int r = 0; r < int'(NRD); r++) begin
      if (re[r]) rdata[r] <= mem[raddr[r]];
    end
  end

endmodule
