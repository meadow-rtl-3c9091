// pe_broadcast_mac: MAC core of a Broadcasting MAC PE.
//
// Each cycle one input element `a` is broadcast to all N multipliers; each
// multiplier multiplies it with its own output channel's weight and adds the
// product into that channel's accumulator (register plus adder). Over d_mult
// cycles the N accumulators build N dot products in parallel, as in the
// paper's broadcasting PE. In the TPHS dataflow `a` is one softmax value and
// `w` the matching row of V, so after T cycles the accumulators hold one
// token's SMxV output row.
//
// `first` clears the accumulators, `last` marks the final element.
// Timing: one element per cycle; out_valid/out_acc appear one cycle after the
// element flagged `last`.
module pe_broadcast_mac
  import meadow_pkg::*;
#(
  parameter int unsigned N = MULTS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid,
  input  logic                first,
  input  logic                last,
  input  data_t               a,
  input  logic [N*DATA_W-1:0] w,
  output logic                out_valid,
  output acc_t                out_acc [N]
);
  acc_t acc_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < int'(N); i++) acc_q[i] <= '0;
    end else begin
      out_valid <= valid && last;
      if (valid) begin
        for (int i = 0; i < int'(N); i++) begin
          acc_q[i] <= (first ? acc_t'(0) : acc_q[i])
                      + acc_t'(a) * acc_t'($signed(w[i*DATA_W +: DATA_W]));
        end
      end
    end
  end

  assign out_acc = acc_q;

endmodule
