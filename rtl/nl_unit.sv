// nl_unit: non-linear activation (NL) module, ReLU or GeLU.
//
// Applies the selected function to ELEMS signed int8 activations per cycle,
// with one cycle of latency. Eight such modules of eight elements each cover
// one 64-byte output row per cycle.
//
// The paper only names the NL module and its functions (ReLU/GeLU). The
// arithmetic is this design's choice: activations carry FRAC = 4 fractional
// bits (x/16). GeLU(x) = x * Phi(x) with Phi(x) = (1 + erf(x/sqrt 2))/2 and the
// second-order erf approximation
//   erf(u) ~ sgn(u) * (1 + A*(min(|u|, 1.769) - 1.769)^2),  A = -0.2888.
// With u = x/(16*sqrt 2) the clip point is |x| = 40 and the square becomes
// s^2/512, s = 40 - min(|x|, 40), so Phi needs one small multiply:
//   L = 1 - 0.2888*s^2/512 (Q0.16: 65536 - (18927*s^2 >> 9)).
module nl_unit
  import meadow_pkg::*;
#(
  parameter int unsigned ELEMS = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  nl_func_e                func,
  input  logic [ELEMS*DATA_W-1:0] in_data,
  output logic                    out_valid,
  output logic [ELEMS*DATA_W-1:0] out_data
);
  function automatic data_t gelu(data_t x);
    logic [7:0]  ax;
    logic [7:0]  s;
    logic [31:0] l, phi;
    logic signed [47:0] prod;
    ax   = (x < 0) ? 8'(-int'(x)) : 8'(x);
    s    = (ax >= 8'd40) ? 8'd0 : 8'd40 - ax;
    l    = 32'd65536 - ((32'd18927 * 32'(s) * 32'(s)) >> 9);
    phi  = (x < 0) ? (32'd65536 - l) >> 1 : (32'd65536 + l) >> 1;
    prod = 48'(x) * $signed({16'd0, phi}) + 48'sd32768;
    return data_t'(prod >>> 16);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < int'(ELEMS); i++) begin
          if (func == NL_RELU)
            out_data[i*DATA_W +: DATA_W] <= ($signed(in_data[i*DATA_W +: DATA_W]) < 0)
                                            ? '0 : in_data[i*DATA_W +: DATA_W];
          else
            out_data[i*DATA_W +: DATA_W] <= gelu(data_t'(in_data[i*DATA_W +: DATA_W]));
        end
      end
    end
  end

endmodule
