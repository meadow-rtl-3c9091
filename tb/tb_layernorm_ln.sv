// tb_layernorm_ln: self-checking test of the LN module.
// Normalizes random tokens (random mean and spread, plus a constant token
// and a two-level token) and compares each output with (x - mean)/std
// computed in floating point, scaled by 16 and saturated to int8, allowing
// 1 LSB. Checks the timing of this design: all F features are accepted in F
// cycles, and the first result follows the last feature after the square
// root phase; outputs are one per cycle with out_last on the F-th.
module tb_layernorm_ln;
  import meadow_pkg::*;
  localparam int MAXF = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [$clog2(MAXF+1)-1:0] feat;
  logic in_valid, in_ready, out_valid, out_last;
  data_t in_data, out_data;

  layernorm_ln #(.MAX_F(MAXF)) dut (.clk, .rst_n, .feat, .in_valid, .in_ready, .in_data,
    .out_valid, .out_data, .out_last);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [MAXF];
  int expv [MAXF];

  task automatic run_token(int F, int kind);
    real m, v, y;
    int n, c0, gap;
    int base, spread;
    base = $urandom_range(120) - 60;
    spread = 1 + $urandom_range(60);
    for (int i = 0; i < F; i++) begin
      case (kind)
        0: x[i] = base + int'($urandom_range(2 * spread)) - spread;
        1: x[i] = 17;
        default: x[i] = (i % 2) ? 40 : -40;
      endcase
      if (x[i] > 127) x[i] = 127;
      if (x[i] < -128) x[i] = -128;
    end
    m = 0; v = 0;
    for (int i = 0; i < F; i++) m += x[i];
    m = m / F;
    for (int i = 0; i < F; i++) v += (x[i] - m) * (x[i] - m);
    v = v / F;
    for (int i = 0; i < F; i++) begin
      y = (v == 0) ? 0.0 : (x[i] - m) / $sqrt(v) * 16.0;
      if (y > 127) y = 127;
      if (y < -128) y = -128;
      expv[i] = int'($floor(y + 0.5));
    end
    feat <= F;
    @(posedge clk);
    c0 = 0;
    for (int i = 0; i < F; i++) begin
      in_valid <= 1; in_data <= data_t'(x[i]);
      @(posedge clk);
      c0++;
      while (!in_ready) begin @(posedge clk); c0++; end
    end
    in_valid <= 0;
    check(c0 == F, $sformatf("F=%0d features accepted in %0d cycles", F, c0));
    n = 0; gap = 0;
    while (!out_valid) begin @(posedge clk); #1; gap++; end
    check(gap < 48, $sformatf("square root phase took %0d cycles", gap));
    while (n < F) begin
      int d;
      check(out_valid, "results one per cycle");
      d = int'(out_data) - expv[n];
      check(d <= 1 && d >= -1, $sformatf("F=%0d kind %0d feature %0d: x=%0d got %0d exp %0d", F, kind, n, x[n], out_data, expv[n]));
      check(out_last == (n == F - 1), "last flag");
      n++;
      @(posedge clk); #1;
    end
    check(!out_valid, "no extra results");
  endtask

  initial begin
    in_valid = 0; in_data = '0; feat = 8;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_token(64, 0);
    run_token(8, 1);
    run_token(32, 2);
    for (int k = 0; k < 10; k++) run_token(8 + $urandom_range(MAXF - 8), 0);
    run_token(MAXF, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
