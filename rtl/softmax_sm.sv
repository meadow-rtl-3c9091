// softmax_sm: pipelined softmax (SM) module.
//
// Computes SM_i = exp(x_i - max) / sum_j exp(x_j - max) over the F features
// of a token in three stages, each spending F cycles on a token, one feature
// per cycle:
//   MAX stage  stores the incoming features in the EXP-stage buffer and keeps
//              the running maximum;
//   EXP stage  reads the buffer, subtracts the maximum, looks the difference
//              up in the EXP LUT, writes the exponent into the DIV-stage
//              buffer and sums the exponents;
//   DIV stage  reads the exponents back and divides each by the sum.
// Both buffers have two banks, so the three stages work on three successive
// tokens at once and a new token can enter every F cycles.
//
// Number formats (this design's choice; the paper gives none): the input is
// a signed int8 score with FRAC_IN fractional bits (x/16 by default). The
// EXP LUT holds exp(-d / 2**FRAC_IN) for d = 0..255 as unsigned Q0.16,
// computed at elaboration by repeated multiplication with EXP_STEP =
// round(2**16 * exp(-1/16)) = 61565. The output is the probability in
// signed Q0.7 (0..127), which the broadcasting PE uses as its int8 input.
//
// Interface: in_valid/in_ready stream of features (F = feat per token, set
// while idle); out_valid/out_data/out_idx/out_last stream of results, no
// back-pressure. Latency: a token's first result appears 2F+2 cycles after
// its first feature when the pipeline is free.
module softmax_sm
  import meadow_pkg::*;
#(
  parameter int unsigned MAX_F    = 1024,
  parameter int unsigned EXP_STEP = 61565   // round(65536*exp(-1/16)), FRAC_IN = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(MAX_F+1)-1:0] feat,     // F, features per token
  input  logic                      in_valid,
  output logic                      in_ready,
  input  data_t                     in_data,
  output logic                      out_valid,
  output data_t                     out_data,
  output logic [$clog2(MAX_F)-1:0]  out_idx,
  output logic                      out_last
);
  localparam int unsigned IW    = $clog2(MAX_F);
  localparam int unsigned SUM_W = 16 + IW + 1;

  typedef logic [IW-1:0]    idx_t;
  typedef logic [SUM_W-1:0] sum_t;

  // EXP LUT, exp(-d/16) in Q0.16 for d = 0..255
  function automatic logic [256*16-1:0] make_lut();
    logic [256*16-1:0] t;
    logic [31:0] v;
    v = 32'd65535;
    for (int d = 0; d < 256; d++) begin
      t[d*16 +: 16] = v[15:0];
      v = (v * EXP_STEP + 32'd32768) >> 16;
    end
    return t;
  endfunction
  localparam logic [256*16-1:0] EXP_LUT = make_lut();

  data_t       xbuf [2][MAX_F];   // EXP-stage buffer
  logic [15:0] ebuf [2][MAX_F];   // DIV-stage buffer

  idx_t fm1;
  assign fm1 = idx_t'(feat - 1'b1);

  // ---------------- MAX stage ----------------
  logic  m_bank, m_full, m_fbank;
  idx_t  m_cnt;
  data_t m_max, m_fmax, max_now;
  logic  in_fire, m_finish;

  assign in_ready = !m_full;
  assign in_fire  = in_valid && in_ready;
  assign m_finish = in_fire && (m_cnt == fm1);
  assign max_now  = (m_cnt == '0 || in_data > m_max) ? in_data : m_max;

  // ---------------- EXP stage ----------------
  logic  e_busy, e_full, e_bank, e_obank, e_fobank;
  idx_t  e_cnt;
  data_t e_max;
  sum_t  e_sum, e_fsum, sum_now;
  logic [15:0] exp_now;
  logic [8:0]  diff;
  logic  e_finish;

  assign diff     = 9'($signed(e_max) - $signed(xbuf[e_bank][e_cnt]));
  assign exp_now  = EXP_LUT[diff[7:0]*16 +: 16];
  assign sum_now  = e_sum + sum_t'(exp_now);
  assign e_finish = e_busy && (e_cnt == fm1);

  // ---------------- DIV stage ----------------
  logic  d_busy, d_bank;
  idx_t  d_cnt;
  sum_t  d_sum;
  logic  d_finish;
  logic [SUM_W+7:0] quot;

  assign d_finish = d_busy && (d_cnt == fm1);
  always_comb begin
    quot = ({8'd0, ebuf[d_bank][d_cnt]} * (SUM_W+8)'(128) + (SUM_W+8)'(d_sum >> 1))
           / (SUM_W+8)'(d_sum);
  end

  // ---------------- hand-off between stages ----------------
  logic d_free_next, e_full_next, e_avail_next, e_hand, m_hand;
  always_comb begin
    d_free_next  = !d_busy || d_finish;
    e_hand       = (e_finish || e_full) && d_free_next;
    e_full_next  = (e_finish || e_full) && !d_free_next;
    e_avail_next = (!e_busy || e_finish) && !e_full_next;
    m_hand       = (m_finish || m_full) && e_avail_next;
  end

  always_ff @(posedge clk) begin
    if (in_fire) xbuf[m_bank][m_cnt] <= in_data;
    if (e_busy)  ebuf[e_obank][e_cnt] <= exp_now;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_bank <= 1'b0; m_full <= 1'b0; m_fbank <= 1'b0; m_cnt <= '0;
      m_max <= '0; m_fmax <= '0;
      e_busy <= 1'b0; e_full <= 1'b0; e_bank <= 1'b0; e_obank <= 1'b0; e_fobank <= 1'b0;
      e_cnt <= '0; e_max <= '0; e_sum <= '0; e_fsum <= '0;
      d_busy <= 1'b0; d_bank <= 1'b0; d_cnt <= '0; d_sum <= '1;
      out_valid <= 1'b0; out_data <= '0; out_idx <= '0; out_last <= 1'b0;
    end else begin
      // MAX stage
      if (in_fire) begin
        m_max <= max_now;
        if (m_finish) begin
          m_cnt   <= '0;
          m_bank  <= !m_bank;
          m_fbank <= m_bank;
          m_fmax  <= max_now;
        end else begin
          m_cnt <= m_cnt + 1'b1;
        end
      end
      m_full <= (m_finish || m_full) && !e_avail_next;

      // EXP stage
      if (e_busy) begin
        e_sum <= sum_now;
        e_cnt <= e_cnt + 1'b1;
        if (e_finish) begin
          e_busy   <= 1'b0;
          e_fsum   <= sum_now;
          e_fobank <= e_obank;
        end
      end
      e_full <= e_full_next;
      if (m_hand) begin
        e_busy  <= 1'b1;
        e_cnt   <= '0;
        e_sum   <= '0;
        e_bank  <= m_finish ? m_bank : m_fbank;
        e_max   <= m_finish ? max_now : m_fmax;
        e_obank <= !e_obank;
      end

      // DIV stage
      out_valid <= d_busy;
      out_idx   <= d_cnt;
      out_last  <= d_finish;
      out_data  <= (quot > 127) ? data_t'(127) : data_t'(quot[7:0]);
      if (d_busy) begin
        d_cnt <= d_cnt + 1'b1;
        if (d_finish) d_busy <= 1'b0;
      end
      if (e_hand) begin
        d_busy <= 1'b1;
        d_cnt  <= '0;
        d_sum  <= e_finish ? sum_now : e_fsum;
        d_bank <= e_finish ? e_obank : e_fobank;
      end
    end
  end

endmodule
