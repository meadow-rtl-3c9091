// tb_hybrid_pe: self-checking test of the hybrid PE in both variants.
// Parallel PE: a GEMM run (token in the input RF, 70 weight rows of 2 chunks
// each, results requantized into the output RF, crossing a row boundary)
// while the other weight-RF bank is being overwritten (double buffering), then
// a pipelined run reading the PREG and forwarding results, with the result
// one cycle after the command. Broadcasting PE: a pipelined SMxV-style run
// (PREG elements broadcast against weight rows) and a GEMM run into the
// output RF. References are computed in the testbench.
module tb_hybrid_pe;
  import meadow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // two DUTs sharing the write and command buses
  logic       wrf_we, wrf_bank, irf_we, irf_bank, preg_we, preg_bank;
  logic [5:0] wrf_addr, irf_addr;
  row_bits_t  wrf_data, irf_data, preg_row;
  logic [MULTS-1:0] preg_mask;
  pe_cmd_t    cmd;
  logic       orf_clr, orf_rbank;
  logic [5:0] orf_raddr;
  row_bits_t  p_orf, b_orf, p_res, b_res;
  logic [11:0] p_cnt, b_cnt;
  logic       p_res_v, b_res_v;
  logic       sel_b;   // command goes to the broadcasting PE when 1
  pe_cmd_t    cmd_p, cmd_b;
  assign cmd_p = sel_b ? '0 : cmd;
  assign cmd_b = sel_b ? cmd : '0;

  hybrid_pe #(.BROADCAST(1'b0)) u_par (
    .clk, .rst_n, .wrf_we, .wrf_bank, .wrf_addr, .wrf_data, .irf_we, .irf_bank, .irf_addr, .irf_data,
    .preg_we, .preg_bank, .preg_mask, .preg_row, .cmd(cmd_p), .orf_clr, .orf_wbank(1'b0),
    .orf_rbank, .orf_raddr, .orf_rdata(p_orf), .orf_count(p_cnt), .res_valid(p_res_v), .res_data(p_res));
  hybrid_pe #(.BROADCAST(1'b1)) u_bc (
    .clk, .rst_n, .wrf_we, .wrf_bank, .wrf_addr, .wrf_data, .irf_we, .irf_bank, .irf_addr, .irf_data,
    .preg_we, .preg_bank, .preg_mask, .preg_row, .cmd(cmd_b), .orf_clr, .orf_wbank(1'b0),
    .orf_rbank, .orf_raddr, .orf_rdata(b_orf), .orf_count(b_cnt), .res_valid(b_res_v), .res_data(b_res));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int rq(longint a, int sh);
    longint r;
    r = (sh == 0) ? a : ((a + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  // signed byte i of a row
  function automatic int sb(row_bits_t r, int i);
    logic [7:0] b;
    b = 8'(r >> (i * 8));
    return int'($signed(b));
  endfunction

  function automatic row_bits_t rand_row();
    row_bits_t r;
    for (int i = 0; i < MULTS; i++) r[i*8 +: 8] = 8'($urandom());
    return r;
  endfunction

  function automatic longint dot(row_bits_t a, row_bits_t b);
    longint s = 0;
    for (int i = 0; i < MULTS; i++) s += longint'(sb(a, i)) * longint'(sb(b, i));
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    wrf_we <= 0; irf_we <= 0; preg_we <= 0; cmd <= '0; orf_clr <= 0;
  endtask

  row_bits_t tok [2];
  row_bits_t wts [64];
  int        expv [70];

  initial begin
    idle(); sel_b = 0; orf_rbank = 0; orf_raddr = 0;
    wrf_bank = 0; wrf_addr = 0; wrf_data = '0; irf_bank = 0; irf_addr = 0; irf_data = '0;
    preg_bank = 0; preg_mask = '0; preg_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------- parallel PE, GEMM mode ----------
    for (int c = 0; c < 2; c++) begin
      tok[c] = rand_row();
      irf_we <= 1; irf_bank <= 0; irf_addr <= 6'(c); irf_data <= tok[c];
      @(posedge clk);
    end
    irf_we <= 0;
    orf_clr <= 1; @(posedge clk); orf_clr <= 0;
    // 70 outputs; weight rows cycle through 2x16 slots of bank 0 while bank 1
    // is scribbled on in the same cycles
    for (int n = 0; n < 70; n++) begin
      longint s;
      s = 0;
      for (int c = 0; c < 2; c++) begin
        row_bits_t w;
        w = rand_row();
        s += dot(tok[c], w);
        wrf_we <= 1; wrf_bank <= 0; wrf_addr <= 6'((n % 16) * 2 + c); wrf_data <= w;
        cmd <= '0;
        @(posedge clk);
        wrf_bank <= 1; wrf_addr <= 6'((n % 16) * 2 + c); wrf_data <= rand_row();
        cmd <= '{valid: 1'b1, first: (c == 0), last: (c == 1), mode: MODE_GEMM, fwd: 1'b0,
                 wbank: 1'b0, waddr: 6'((n % 16) * 2 + c), ibank: 1'b0, iaddr: 6'(c),
                 pbank: 1'b0, elem: 6'd0, shift: 5'd12};
        @(posedge clk);
      end
      expv[n] = rq(s, 12);
    end
    cmd <= '0; wrf_we <= 0;
    repeat (2) @(posedge clk);
    check(p_cnt == 70, $sformatf("parallel PE output count %0d", p_cnt));
    for (int r = 0; r < 2; r++) begin
      orf_raddr <= 6'(r); @(posedge clk); #1;
      for (int i = 0; i < 64 && r * 64 + i < 70; i++)
        check(sb(p_orf, i) == expv[r*64+i], $sformatf("GEMM out %0d got %0d exp %0d", r*64+i, sb(p_orf, i), expv[r*64+i]));
    end

    // ---------- parallel PE, pipelined mode ----------
    begin
      row_bits_t q, k;
      q = rand_row(); k = rand_row();
      // PREG written in two masked halves
      preg_we <= 1; preg_bank <= 1; preg_mask <= {32'h0, 32'hffffffff}; preg_row <= q;
      @(posedge clk);
      preg_mask <= {32'hffffffff, 32'h0}; preg_row <= q;
      @(posedge clk);
      preg_we <= 0;
      wrf_we <= 1; wrf_bank <= 1; wrf_addr <= 6'd5; wrf_data <= k;
      @(posedge clk);
      wrf_we <= 0;
      cmd <= '{valid: 1'b1, first: 1'b1, last: 1'b1, mode: MODE_PIPE, fwd: 1'b1, wbank: 1'b1,
               waddr: 6'd5, ibank: 1'b0, iaddr: 6'd0, pbank: 1'b1, elem: 6'd0, shift: 5'd8};
      @(posedge clk);
      cmd <= '0;
      #1;
      check(p_res_v, "pipelined result valid one cycle after the command");
      check(int'($signed(p_res[7:0])) == rq(dot(q, k), 8), "QK^T score from the PREG");
      check(p_cnt == 70, "pipelined result not written to the output RF");
      @(posedge clk); #1;
      check(!p_res_v, "single result");
    end

    // ---------- broadcasting PE, pipelined mode ----------
    sel_b = 1;
    begin
      longint s [MULTS];
      row_bits_t p;
      int T = 40;
      for (int i = 0; i < MULTS; i++) s[i] = 0;
      p = rand_row();
      preg_we <= 1; preg_bank <= 0; preg_mask <= '1; preg_row <= p;
      @(posedge clk);
      preg_we <= 0;
      for (int t = 0; t < T; t++) begin
        row_bits_t v;
        v = rand_row();
        for (int i = 0; i < MULTS; i++) s[i] += longint'(sb(p, t)) * longint'(sb(v, i));
        wrf_we <= 1; wrf_bank <= (t >= 32); wrf_addr <= 6'(t % 32); wrf_data <= v;
        @(posedge clk);
        wrf_we <= 0;
        cmd <= '{valid: 1'b1, first: (t == 0), last: (t == T - 1), mode: MODE_PIPE, fwd: 1'b1,
                 wbank: (t >= 32), waddr: 6'(t % 32), ibank: 1'b0, iaddr: 6'd0, pbank: 1'b0,
                 elem: 6'(t), shift: 5'd7};
        @(posedge clk);
        cmd <= '0;
      end
      #1;
      check(b_res_v, "SMxV row valid one cycle after the last element");
      for (int i = 0; i < MULTS; i++)
        check(sb(b_res, i) == rq(s[i], 7), $sformatf("SMxV channel %0d got %0d exp %0d acc %0d", i, sb(b_res, i), rq(s[i], 7), s[i]));
    end

    // ---------- broadcasting PE, GEMM mode ----------
    begin
      longint s [MULTS];
      row_bits_t x;
      for (int i = 0; i < MULTS; i++) s[i] = 0;
      x = rand_row();
      irf_we <= 1; irf_bank <= 1; irf_addr <= 6'd3; irf_data <= x;
      @(posedge clk);
      irf_we <= 0;
      orf_clr <= 1; @(posedge clk); orf_clr <= 0;
      for (int e = 0; e < 8; e++) begin
        row_bits_t v;
        v = rand_row();
        for (int i = 0; i < MULTS; i++) s[i] += longint'(sb(x, e)) * longint'(sb(v, i));
        wrf_we <= 1; wrf_bank <= 0; wrf_addr <= 6'(e); wrf_data <= v;
        @(posedge clk);
        wrf_we <= 0;
        cmd <= '{valid: 1'b1, first: (e == 0), last: (e == 7), mode: MODE_GEMM, fwd: 1'b0,
                 wbank: 1'b0, waddr: 6'(e), ibank: 1'b1, iaddr: 6'd3, pbank: 1'b0,
                 elem: 6'(e), shift: 5'd6};
        @(posedge clk);
        cmd <= '0;
      end
      @(posedge clk); #1;
      check(b_cnt == 1 && !b_res_v, "broadcast GEMM row goes to the output RF");
      orf_raddr <= 6'd0; @(posedge clk); #1;
      for (int i = 0; i < MULTS; i++)
        check(sb(b_orf, i) == rq(s[i], 6), $sformatf("broadcast GEMM ch %0d", i));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

