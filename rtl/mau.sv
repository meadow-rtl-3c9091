// mau: mode-aware unpacking (MAU) of one packed weight packet.
//
// A packet is {mode[MODE_W-1:0], enc[PACK_W-1:0]}. The mode selects the bit
// width of every chunk ID inside the packet: width = 2**mode, so modes 0, 1
// and 2 unpack 1-, 2- and 4-bit IDs as in the paper's 8-bit example
// (d0..d7 -> eight 1-bit, four 2-bit or two 4-bit values). ID k occupies
// enc[k*width +: width], i.e. d0 is the least significant bit of ID 0, which
// is how the columns of the unpacking figure are drawn (mode 1: {d1,d0},
// {d3,d2}, ...; mode 2: {d3..d0}, {d7..d4}). Up to floor(PACK_W/width) IDs are
// unpacked; a field wider than ID_W keeps its low ID_W bits (the packer
// leaves the rest zero). A mode whose width exceeds PACK_W yields no IDs and
// raises bad_mode.
//
// Purely combinational. The 3-bit mode field follows the paper's figure;
// PACK_W = 29 (a 32-bit packet) and ID_W = 11 (1272 unique chunks of the
// OPT-125M MLP1 layer need 11-bit IDs) are this design's choice of sizes.
module mau #(
  parameter int unsigned PACK_W = 29,
  parameter int unsigned MODE_W = 3,
  parameter int unsigned ID_W   = 11
) (
  input  logic [MODE_W-1:0]           mode,
  input  logic [PACK_W-1:0]           enc,
  output logic [PACK_W-1:0][ID_W-1:0] ids,     // unpacked chunk IDs, ID 0 first
  output logic [$clog2(PACK_W+1)-1:0] count,   // number of valid IDs
  output logic                        bad_mode
);
  localparam int unsigned CNT_W = $clog2(PACK_W + 1);

  logic [31:0] width;

  always_comb begin
    width    = 32'(1) << mode;
    bad_mode = (width > PACK_W);
    count    = bad_mode ? '0 : CNT_W'(PACK_W / width);
    for (int k = 0; k < PACK_W; k++) begin
      ids[k] = '0;
      if (!bad_mode && (k < count)) begin
        for (int b = 0; b < ID_W; b++) begin
          if (b < width) ids[k][b] = enc[k * width + b];
        end
      end
    end
  end

endmodule
