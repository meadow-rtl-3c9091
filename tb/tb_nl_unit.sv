// tb_nl_unit: self-checking test of the NL (activation) module.
// Sweeps every int8 input value through ReLU (checked exactly) and GeLU
// (checked against x*Phi(x) computed in floating point with the exact
// Gaussian CDF, inputs scaled by 1/16, allowing 2 LSB for the second-order
// erf approximation this design uses), then random rows with the function
// switching every cycle. Checks the one-cycle latency.
module tb_nl_unit;
  import meadow_pkg::*;
  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  nl_func_e func;
  logic [E*8-1:0] in_data, out_data;

  nl_unit #(.ELEMS(E)) dut (.clk, .rst_n, .in_valid, .func, .in_data, .out_valid, .out_data);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // erf by its Taylor series, accurate far beyond int8 resolution for |u| <= 6
  function automatic real erf_r(real u);
    real term, s;
    if (u > 4.0) return 1.0;
    if (u < -4.0) return -1.0;
    term = u; s = u;
    for (int n = 1; n < 80; n++) begin
      term = -term * u * u / n;
      s += term / (2 * n + 1);
    end
    return s * 2.0 / $sqrt(3.14159265358979);
  endfunction

  function automatic int ref_nl(int x, nl_func_e f);
    real v;
    if (f == NL_RELU) return (x < 0) ? 0 : x;
    v = x / 16.0;
    v = v * 0.5 * (1.0 + erf_r(v / $sqrt(2.0)));
    return int'($floor(v * 16.0 + 0.5));
  endfunction

  function automatic int byte_at(logic [E*8-1:0] r, int i);
    logic [7:0] b;
    b = 8'(r >> (i * 8));
    return int'($signed(b));
  endfunction

  task automatic apply(logic [E*8-1:0] row, nl_func_e f);
    in_valid <= 1; func <= f; in_data <= row;
    @(posedge clk);
    in_valid <= 0;
    #1;
    check(out_valid, "result one cycle after the input");
    for (int i = 0; i < E; i++) begin
      int d;
      d = byte_at(out_data, i) - ref_nl(byte_at(row, i), f);
      if (f == NL_RELU) check(d == 0, $sformatf("ReLU(%0d) got %0d", byte_at(row, i), byte_at(out_data, i)));
      else check(d <= 2 && d >= -2, $sformatf("GeLU(%0d) got %0d exp %0d", byte_at(row, i), byte_at(out_data, i), ref_nl(byte_at(row, i), f)));
    end
  endtask

  initial begin
    in_valid = 0; func = NL_RELU; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < 2; f++)
      for (int b = 0; b < 256; b += E) begin
        logic [E*8-1:0] row;
        for (int i = 0; i < E; i++) row[i*8 +: 8] = 8'(b + i);
        apply(row, nl_func_e'(f));
      end
    for (int n = 0; n < 100; n++) begin
      logic [E*8-1:0] row;
      for (int i = 0; i < E; i++) row[i*8 +: 8] = 8'($urandom());
      apply(row, nl_func_e'(n % 2));
    end
    @(posedge clk); #1;
    check(!out_valid, "no result without input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
