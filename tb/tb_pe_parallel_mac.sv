// tb_pe_parallel_mac: self-checking test of the parallel MAC core.
// Random signed int8 vectors; dot products of 1 to 5 chunks of 64 are
// accumulated with first/last and compared with a reference sum. Also
// checks the one-cycle latency and one step per cycle (back-to-back
// dot products).
module tb_pe_parallel_mac;
  import meadow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid, first, last, out_valid;
  logic [MULTS*8-1:0] x, w;
  acc_t out_acc;
  pe_parallel_mac u_dut (.clk, .rst_n, .valid, .first, .last, .x, .w, .out_valid, .out_acc);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint expq [$];
  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0 || longint'(out_acc) != expq[0]) begin
      failures++;
      $display("FAIL: got %0d exp %0d", out_acc, expq.size() ? expq[0] : 0);
    end
    if (expq.size() != 0) void'(expq.pop_front());
  end

  initial begin
    valid = 0; first = 0; last = 0; x = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n;
      longint s;
      n = $urandom_range(1, 5);
      s = 0;
      for (int c = 0; c < n; c++) begin
        logic [MULTS*8-1:0] xt, wt;
        for (int i = 0; i < MULTS; i++) begin
          logic signed [7:0] a, b;
          a = (t < 3) ? -8'sd128 : 8'($urandom());
          b = (t < 3) ? -8'sd128 : 8'($urandom());
          xt[i*8 +: 8] = a; wt[i*8 +: 8] = b;
          s += longint'(a) * longint'(b);
        end
        x <= xt; w <= wt;
        valid <= 1; first <= (c == 0); last <= (c == n - 1);
        if (c == n - 1) expq.push_back(s);
        @(posedge clk);
        // idle cycles must not disturb the accumulator
        if ($urandom_range(0, 3) == 0) begin valid <= 0; @(posedge clk); end
      end
    end
    valid <= 0;
    // latency check: result exactly one cycle after the last step
    x <= {{(MULTS*8-8){1'b0}}, 8'd3}; w <= {{(MULTS*8-8){1'b0}}, 8'd5};
    valid <= 1; first <= 1; last <= 1; expq.push_back(15);
    @(posedge clk); valid <= 0;
    #1 checks++; if (!(out_valid && out_acc == 15)) begin failures++; $display("FAIL: latency"); end
    repeat (3) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL: missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
