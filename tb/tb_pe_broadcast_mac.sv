// tb_pe_broadcast_mac: self-checking test of the broadcasting MAC core.
// One random int8 element per cycle is broadcast against a 64-wide weight
// row, for sequences of 1 to 70 elements (an SMxV row over T tokens); all
// 64 accumulators are compared with a reference, and the result must
// appear one cycle after the last element.
module tb_pe_broadcast_mac;
  import meadow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid, first, last, out_valid;
  data_t a;
  logic [MULTS*8-1:0] w;
  acc_t out_acc [MULTS];
  pe_broadcast_mac u_dut (.clk, .rst_n, .valid, .first, .last, .a, .w, .out_valid, .out_acc);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s [MULTS];
    valid = 0; first = 0; last = 0; a = 0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n;
      n = $urandom_range(1, 70);
      for (int i = 0; i < MULTS; i++) s[i] = 0;
      for (int e = 0; e < n; e++) begin
        data_t at;
        logic [MULTS*8-1:0] wt;
        at = 8'($urandom());
        for (int i = 0; i < MULTS; i++) begin
          logic signed [7:0] b;
          b = 8'($urandom());
          wt[i*8 +: 8] = b;
          s[i] += longint'(at) * longint'(b);
        end
        a <= at; w <= wt;
        valid <= 1; first <= (e == 0); last <= (e == n - 1);
        @(posedge clk);
      end
      valid <= 0; first <= 0; last <= 0;
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: no result one cycle after last"); end
      for (int i = 0; i < MULTS; i++) begin
        checks++;
        if (longint'(out_acc[i]) != s[i]) begin
          failures++; $display("FAIL: seq %0d ch %0d got %0d exp %0d", t, i, out_acc[i], s[i]);
        end
      end
      @(posedge clk);
      #1 checks++;
      if (out_valid) begin failures++; $display("FAIL: out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
