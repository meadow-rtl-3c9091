// tb_softmax_sm: self-checking test of the pipelined softmax module.
// Sends six tokens of F = 24 random scores back to back and compares every
// probability with a floating-point softmax (exp((x - max)/16), scaled to
// Q0.7 and rounded), allowing 2 LSB for the LUT and rounding. Checks the
// pipeline timing of this design: the first result of token k appears
// 2F + 2 + k*F cycles after the first feature of token 0, i.e. a new token is
// accepted every F cycles while three tokens are in flight (MAX, EXP and DIV
// stages). A second pass with random input gaps checks the handshake. The
// Q0.7 output format and the x/16 input scale are this design's choices.
module tb_softmax_sm;
  import meadow_pkg::*;
  localparam int MAXF = 64;
  localparam int F = 24;
  localparam int NT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [$clog2(MAXF+1)-1:0] feat;
  logic in_valid, in_ready, out_valid, out_last;
  data_t in_data, out_data;
  logic [$clog2(MAXF)-1:0] out_idx;

  softmax_sm #(.MAX_F(MAXF)) dut (.clk, .rst_n, .feat, .in_valid, .in_ready, .in_data,
    .out_valid, .out_data, .out_idx, .out_last);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [2][NT][F];
  int expq [2][NT][F];
  int cyc = 0;
  int first_out [NT];
  always @(posedge clk) cyc <= cyc + 1;

  // reference softmax in Q0.7
  task automatic ref_token(int pass, int t);
    real m, s, p;
    m = -1000.0; s = 0.0;
    for (int i = 0; i < F; i++) if (x[pass][t][i] > m) m = x[pass][t][i];
    for (int i = 0; i < F; i++) s += $exp((x[pass][t][i] - m) / 16.0);
    for (int i = 0; i < F; i++) begin
      p = $exp((x[pass][t][i] - m) / 16.0) / s * 128.0;
      expq[pass][t][i] = (p >= 127.0) ? 127 : int'($floor(p + 0.5));
    end
  endtask

  // output checker
  int ot = 0, oi = 0, opass = 0, nres = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      int d;
      if (oi == 0 && opass == 0) first_out[ot] = cyc;
      d = int'(out_data) - expq[opass][ot][oi];
      check(d <= 2 && d >= -2,
            $sformatf("pass %0d token %0d feature %0d got %0d exp %0d", opass, ot, oi, out_data, expq[opass][ot][oi]));
      check(int'(out_idx) == oi && out_last == (oi == F - 1), "index and last flag");
      nres++;
      if (oi == F - 1) begin
        oi = 0;
        if (ot == NT - 1) begin ot = 0; opass++; end else ot++;
      end else oi++;
    end
  end

  int start_cyc;
  initial begin
    in_valid = 0; in_data = '0; feat = F;
    for (int p = 0; p < 2; p++)
      for (int t = 0; t < NT; t++) begin
        for (int i = 0; i < F; i++) x[p][t][i] = int'($signed(8'($urandom())));
        if (t == 1) for (int i = 0; i < F; i++) x[p][t][i] = 5;   // flat token
        ref_token(p, t);
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // pass 0: back to back
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < F; i++) begin
        in_valid <= 1; in_data <= data_t'(x[0][t][i]);
        @(posedge clk);
        if (t == 0 && i == 0) start_cyc = cyc - 1;
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
    // pass 1: random gaps
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < F; i++) begin
        in_valid <= 0;
        repeat ($urandom_range(2)) @(posedge clk);
        in_valid <= 1; in_data <= data_t'(x[1][t][i]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
    repeat (4 * F + 20) @(posedge clk);
    check(nres == 2 * NT * F, $sformatf("result count %0d", nres));
    for (int t = 0; t < NT; t++)
      check(first_out[t] - start_cyc == 2 * F + 2 + t * F,
            $sformatf("token %0d first result after %0d cycles, expected %0d", t, first_out[t] - start_cyc, 2 * F + 2 + t * F));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
