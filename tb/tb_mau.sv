// tb_mau: self-checking test of the mode-aware unpacking module.
// Checks the 8-bit example of the unpacking figure (modes 0, 1, 2) on an
// 8-bit instance, then random packets in every mode on the default 29-bit
// instance against a shift-and-mask reference, including the modes that
// give no IDs.
module tb_mau;
  int checks = 0, failures = 0;

  // figure-sized instance: 8 packed bits
  logic [2:0] m8;
  logic [7:0] e8;
  logic [7:0][3:0] ids8;
  logic [3:0] cnt8;
  logic bad8;
  mau #(.PACK_W(8), .MODE_W(3), .ID_W(4)) u8 (.mode(m8), .enc(e8), .ids(ids8), .count(cnt8), .bad_mode(bad8));

  // default instance
  logic [2:0]  m;
  logic [28:0] e;
  logic [28:0][10:0] ids;
  logic [4:0]  cnt;
  logic        bad;
  mau u_dut (.mode(m), .enc(e), .ids(ids), .count(cnt), .bad_mode(bad));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // figure example: d7..d0 = 1011_0110
    e8 = 8'b1011_0110;
    m8 = 3'd0; #1;
    check(cnt8 == 8 && !bad8, "mode0 count");
    for (int k = 0; k < 8; k++) check(ids8[k] == 4'(e8[k]), $sformatf("mode0 id%0d", k));
    m8 = 3'd1; #1;
    check(cnt8 == 4, "mode1 count");
    check(ids8[0] == 4'b10 && ids8[1] == 4'b01 && ids8[2] == 4'b11 && ids8[3] == 4'b10, "mode1 ids");
    m8 = 3'd2; #1;
    check(cnt8 == 2, "mode2 count");
    check(ids8[0] == 4'b0110 && ids8[1] == 4'b1011, "mode2 ids");
    m8 = 3'd3; #1;
    check(!bad8 && cnt8 == 1 && ids8[0] == 4'b0110, "mode3: one 8-bit field, low ID_W bits kept");
    m8 = 3'd4; #1;
    check(bad8 && cnt8 == 0, "mode4 wider than the packet is rejected");

    // random packets on the default instance
    for (int t = 0; t < 400; t++) begin
      int w, n;
      m = 3'($urandom_range(0, 7));
      e = 29'($urandom());
      #1;
      w = 1 << m;
      n = (w > 29) ? 0 : 29 / w;
      check(int'(cnt) == n && bad == (n == 0), $sformatf("count mode %0d", m));
      for (int k = 0; k < 29; k++) begin
        longint exp_id;
        exp_id = (k < n) ? ((longint'(e) >> (k * w)) & ((longint'(1) << ((w > 11) ? 11 : w)) - 1)) : 0;
        check(longint'(ids[k]) == exp_id, $sformatf("mode %0d id %0d", m, k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
