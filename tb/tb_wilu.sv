// tb_wilu: self-checking test of the weight unpacking and index look-up
// module. The testbench builds a random unique matrix, draws a stream of
// chunk IDs with a skewed (mostly small) distribution, packs them with a
// per-packet mode (smallest ID width that holds every ID of the packet),
// inserts empty filler packets, and checks every assembled 64-byte row
// against rows built directly from the unique matrix. The row consumer
// applies random back-pressure. Throughput is checked without back-pressure:
// a row of 16 chunks must take at most 17 cycles once packets are available
// (plus one cycle per filler packet).
module tb_wilu;
  import meadow_pkg::*;
  localparam int NROWS = 24;
  localparam int NIDS  = NROWS * 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        um_we;
  logic [10:0] um_waddr;
  logic [31:0] um_wdata;
  logic        pkt_valid, pkt_ready, flush, row_valid, row_ready, bad_mode;
  logic [2:0]  pkt_mode;
  logic [28:0] pkt_enc;
  row_bits_t   row_data;

  wilu u_dut (.clk, .rst_n, .um_we, .um_waddr, .um_wdata, .pkt_valid, .pkt_ready, .pkt_mode,
              .pkt_enc, .flush, .row_valid, .row_ready, .row_data, .bad_mode);

  logic [31:0] umat [2048];
  int          id_stream [NIDS];
  logic [31:0] packets [$];
  row_bits_t   exp_rows [NROWS];
  int          rows_seen;
  bit          random_bp;
  int          fillers;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // packet-specific packing of id_stream[lo..hi)
  task automatic pack(int lo, int hi);
    int i = lo;
    while (i < hi) begin
      int m, w, n;
      logic [28:0] enc;
      for (m = 0; m <= 4; m++) begin
        bit ok = 1;
        w = 1 << m;
        n = 29 / w;
        for (int k = 0; k < n && i + k < hi; k++) if (id_stream[i+k] >= (1 << w)) ok = 0;
        if (ok) break;
      end
      w = 1 << m; n = 29 / w; enc = '0;
      for (int k = 0; k < n && i + k < hi; k++) enc |= 29'(id_stream[i+k]) << (k * w);
      packets.push_back({3'(m), enc});
      if ($urandom_range(0, 7) == 0) begin
        packets.push_back({3'd7, 29'd0});  // filler, costs one cycle
        fillers++;
      end
      i += n;
    end
  endtask

  task automatic run(bit bp);
    int t0, cyc;
    random_bp = bp;
    rows_seen = 0;
    pkt_valid = 0;
    cyc = 0;
    fork
      begin
        foreach (packets[p]) begin
          pkt_valid <= 1; pkt_mode <= packets[p][31:29]; pkt_enc <= packets[p][28:0];
          @(posedge clk);
          while (!pkt_ready) @(posedge clk);
        end
        pkt_valid <= 0;
      end
      begin
        while (rows_seen < NROWS) begin
          @(posedge clk);
          cyc++;
          if (row_valid && row_ready) begin
            check(row_data == exp_rows[rows_seen], $sformatf("row %0d", rows_seen));
            rows_seen++;
          end
        end
      end
    join_any
    wait (rows_seen == NROWS);
    if (!bp) check(cyc <= NROWS * 17 + fillers + 8, $sformatf("throughput: %0d cycles for %0d rows", cyc, NROWS));
    flush <= 1; pkt_valid <= 0;
    @(posedge clk);
    flush <= 0;
    @(posedge clk);
    check(!row_valid, "flush empties the output");
  endtask

  always @(posedge clk) row_ready <= random_bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    um_we = 0; pkt_valid = 0; flush = 0; pkt_mode = 0; pkt_enc = 0; random_bp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 2048; a++) begin
      umat[a] = $urandom();
      um_we <= 1; um_waddr <= 11'(a); um_wdata <= umat[a];
      @(posedge clk);
    end
    um_we <= 0;
    for (int pass = 0; pass < 2; pass++) begin
      // skewed IDs: mostly small (after frequency-aware reindexing), some up to 11 bits
      for (int i = 0; i < NIDS; i++) begin
        int r;
        r = $urandom_range(0, 99);
        id_stream[i] = (r < 60) ? $urandom_range(0, 3) : (r < 85) ? $urandom_range(0, 15) :
                       (r < 95) ? $urandom_range(0, 255) : $urandom_range(0, 2047);
      end
      for (int r = 0; r < NROWS; r++)
        for (int k = 0; k < 16; k++) exp_rows[r][k*32 +: 32] = umat[id_stream[r*16+k]];
      packets.delete();
      fillers = 0;
      pack(0, NIDS);
      run(pass == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
