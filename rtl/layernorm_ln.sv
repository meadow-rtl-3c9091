// layernorm_ln: layer normalization (LN) module.
//
// Normalizes one token of F int8 features to zero mean and unit variance:
//   y_i = (x_i - mean) / std,  output with OUT_FRAC = 4 fractional bits.
// Working in integers scaled by F avoids a divide for the mean:
//   y_i = ((F*x_i - S) << OUT_FRAC) / sqrt(F*Q - S^2),  S = sum x, Q = sum x^2.
// Three phases: IN (F cycles) buffers the features and accumulates S and Q;
// SQRT (ROOT_W cycles) takes the integer square root one bit per cycle;
// OUT (F cycles) streams the normalized features, one per cycle.
//
// The paper only names the LN module (eight of them). All of the above is
// this design's choice; the learned scale and shift of layer normalization
// are not included. A constant token (zero variance) gives all-zero output.
//
// Interface: feat = F (held while busy), in_valid/in_ready feature stream,
// out_valid/out_data/out_last result stream without back-pressure.
module layernorm_ln
  import meadow_pkg::*;
#(
  parameter int unsigned MAX_F    = 2048,
  parameter int unsigned OUT_FRAC = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(MAX_F+1)-1:0] feat,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  data_t                      in_data,
  output logic                       out_valid,
  output data_t                      out_data,
  output logic                       out_last
);
  localparam int unsigned IW     = $clog2(MAX_F);
  localparam int unsigned FW     = $clog2(MAX_F + 1);
  localparam int unsigned SW     = IW + 9;            // |S| <= F*128
  localparam int unsigned QW     = IW + 15;           // Q <= F*16384
  localparam int unsigned VW     = FW + QW;           // F*Q
  localparam int unsigned ROOT_W = (VW + 1) / 2;

  typedef enum logic [1:0] {S_IN, S_SQRT, S_OUT} state_e;

  data_t buffer [MAX_F];
  state_e state;
  logic [IW-1:0] cnt;
  logic signed [SW-1:0] s_acc;
  logic [QW-1:0]        q_acc;
  logic [VW-1:0]        rad;      // F*Q - S^2
  logic [ROOT_W-1:0]    root;
  logic [$clog2(ROOT_W+1)-1:0] bitn;
  logic [IW-1:0] fm1;

  assign fm1      = IW'(feat - 1'b1);
  assign in_ready = (state == S_IN);

  // integer square root: try each bit from the top
  logic [ROOT_W-1:0] trial;
  assign trial = root | (ROOT_W'(1) << (bitn - 1'b1));

  // accumulation (explicitly widened)
  logic signed [QW:0]   sq_in;
  logic signed [SW-1:0] s_next;
  logic [QW-1:0]        q_next;
  logic signed [VW:0]   rad_next;
  always_comb begin
    sq_in    = (QW+1)'(in_data) * (QW+1)'(in_data);
    s_next   = s_acc + SW'(in_data);
    q_next   = q_acc + QW'(sq_in);
    rad_next = $signed({1'b0, VW'(feat)}) * $signed({1'b0, VW'(q_next)})
             - (VW+1)'(s_next) * (VW+1)'(s_next);
  end

  // output arithmetic
  logic signed [VW+OUT_FRAC+1:0] num, quo;
  always_comb begin
    num = (((VW+OUT_FRAC+2)'($signed({1'b0, feat})) * (VW+OUT_FRAC+2)'(buffer[cnt]))
           - (VW+OUT_FRAC+2)'(s_acc)) <<< OUT_FRAC;
    if (root == '0) quo = '0;
    else            quo = num / $signed((VW+OUT_FRAC+2)'({1'b0, root}));
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buffer[cnt] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; cnt <= '0; s_acc <= '0; q_acc <= '0; rad <= '0; root <= '0;
      bitn <= '0; out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_IN: if (in_valid) begin
          s_acc <= s_next;
          q_acc <= q_next;
          if (cnt == fm1) begin
            cnt   <= '0;
            state <= S_SQRT;
            rad   <= VW'(rad_next);
            root  <= '0;
            bitn  <= ($clog2(ROOT_W+1))'(ROOT_W);
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SQRT: begin
          if (VW'(trial) * VW'(trial) <= rad) root <= trial;
          bitn <= bitn - 1'b1;
          if (bitn == 1) state <= S_OUT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_last  <= (cnt == fm1);
          out_data  <= (quo > 127) ? data_t'(127) : (quo < -128) ? data_t'(-128) : data_t'(quo[7:0]);
          if (cnt == fm1) begin
            cnt   <= '0;
            state <= S_IN;
            s_acc <= '0;
            q_acc <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

endmodule
