// pe_parallel_mac: MAC core of a Parallel MAC PE.
//
// MULTS multipliers take MULTS input bytes and MULTS weight bytes (the
// multiplication dimension d_mult) and an adder tree reduces the products to
// one sum, so one output channel's d_mult-long dot product is produced per
// cycle, as in the paper's parallel PE (4 multipliers, one output per cycle
// over 4 cycles in its example). Inputs and weights are signed 8-bit, packed
// byte 0 in the least significant bits.
//
// A dot product longer than d_mult is accumulated over several cycles:
// `first` clears the accumulator, `last` marks the final step. This running
// accumulator is this design's addition; the paper only shows one d_mult.
//
// Timing: one step per cycle; out_valid/out_acc appear one cycle after the
// step flagged `last`.
module pe_parallel_mac
  import meadow_pkg::*;
#(
  parameter int unsigned N = MULTS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic                    last,
  input  logic [N*DATA_W-1:0]     x,
  input  logic [N*DATA_W-1:0]     w,
  output logic                    out_valid,
  output acc_t                    out_acc
);
  acc_t tree_sum;
  acc_t acc_q;

  // multipliers and adder tree (written as a reduction; synthesis builds
  // the tree)
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < int'(N); i++) begin
      tree_sum += acc_t'($signed(x[i*DATA_W +: DATA_W])) * acc_t'($signed(w[i*DATA_W +: DATA_W]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= valid && last;
      if (valid) acc_q <= (first ? acc_t'(0) : acc_q) + tree_sum;
    end
  end

  assign out_acc = acc_q;

endmodule
