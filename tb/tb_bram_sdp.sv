// tb_bram_sdp: self-checking test of the block RAM model.
// Writes random words at random addresses while three read ports read
// random addresses; a shadow array in the testbench gives the expected
// words. Checks the one-cycle read latency, that a port with re low keeps
// its last word, and that a read of the address being written returns the
// old word (read-during-write behaviour is this design's choice).
module tb_bram_sdp;
  localparam int W = 512, D = 256, NR = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [7:0] waddr;
  logic [W-1:0] wdata;
  logic [NR-1:0] re;
  logic [NR-1:0][7:0] raddr;
  logic [NR-1:0][W-1:0] rdata;

  bram_sdp #(.WIDTH(W), .DEPTH(D), .NRD(NR)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] shadow [D];
  logic [W-1:0] expd [NR];

  function automatic logic [W-1:0] rand_word();
    logic [W-1:0] r;
    for (int i = 0; i < W / 32; i++) r[i*32 +: 32] = $urandom();
    return r;
  endfunction

  initial begin
    we = 0; waddr = 0; wdata = '0; re = '0; raddr = '0;
    // fill every word, then prime each port with a known word
    for (int a = 0; a < D; a++) begin
      shadow[a] = rand_word();
      we <= 1; waddr <= 8'(a); wdata <= shadow[a];
      @(posedge clk);
    end
    we <= 0; re <= '1; raddr <= '0;
    for (int p = 0; p < NR; p++) expd[p] = shadow[0];
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] nw;
      logic [7:0] wa;
      logic w_en;
      wa = 8'($urandom());
      nw = rand_word();
      w_en = ($urandom_range(1) == 1);
      we <= w_en; waddr <= wa; wdata <= nw;
      for (int p = 0; p < NR; p++) begin
        logic [7:0] ra;
        logic r_en;
        ra = (n % 7 == p) ? wa : 8'($urandom());
        r_en = ($urandom_range(3) != 0);
        re[p] <= r_en;
        raddr[p] <= ra;
        if (r_en) expd[p] = shadow[ra];
      end
      if (w_en) shadow[wa] = nw;
      @(posedge clk); #1;
      for (int p = 0; p < NR; p++) check(rdata[p] == expd[p], $sformatf("port %0d read, step %0d", p, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
