// meadow_top_harness: end-to-end test of the MEADOW top level, shared by
// the reduced-size and the full-size testbench.
//
// The harness plays the host: it generates random activations, K and V
// matrices, a unique-chunk table and weight matrices built from chunk IDs
// with a skewed (frequency-ordered) ID distribution, packs the IDs with the
// packet-specific packer (smallest mode per packet, fillers padding each
// BRAM word), loads the BRAMs and the unique table through the host ports,
// runs jobs and reads the output BRAM back. References are computed here
// with plain integer and floating-point arithmetic:
//   TPHS  q = rq(x W_Q), scores s_i = rq(q K_i) (checked exactly at every
//         softmax input), probabilities (checked within 2 LSB of a
//         floating-point softmax), SMV = rq(sum_i p_i V_i) (checked exactly
//         with the observed probabilities);
//   GEMM  Y = rq(X W^T), exact; with ReLU exact, with GeLU within 2 LSB;
//   LN    (x - mean)/std * 16, within 1 LSB.
// It counts how often each mechanism of the design occurred and counts a
// failure for any that never did: Q/QK^T and Q/SMxV stage overlap across
// token groups, QK^T-to-softmax and softmax-to-SMxV streaming, PREG and
// weight-RF bank switches, each packing mode and filler packets, GEMM- and
// pipeline-mode PE commands, both NL functions, and the LN modules.
//
// Parameters: FULL = 1 instantiates the top with no parameter list (all
// defaults); otherwise the top gets the reduced sizes given here. The job
// sizes (T, DCH, GEMM tokens and outputs, LN tokens) are parameters too.
module meadow_top_harness
  import meadow_pkg::*;
#(
  parameter bit FULL       = 1'b0,
  parameter int LANES      = 2,
  parameter int Q_PES      = 3,
  parameter int MAX_T      = 64,
  parameter int LN_MAXF    = 256,
  parameter int BRAM_DEPTH = 1024,
  parameter int T          = 16,    // TPHS tokens
  parameter int DCH        = 2,     // 64-byte chunks per token
  parameter int G_TOK      = 8,     // GEMM tokens (at most LANES*(Q_PES+1))
  parameter int G_OUT      = 70,    // GEMM outputs per token
  parameter int LN_TOK     = 10,    // LN tokens
  parameter bit DO_GEMM    = 1'b1,
  parameter bit DO_LN      = 1'b1,
  parameter int WATCHDOG   = 400000
) ();
  localparam int NPAR = LANES * (Q_PES + 1);
  localparam int AW   = $clog2(BRAM_DEPTH);
  localparam int D    = 64 * DCH;
  localparam int UNIQ = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_in_we, host_w_we, host_um_we, host_out_re, start, busy, done, wilu_bad_mode;
  logic [AW-1:0] host_in_addr, host_w_addr, host_out_addr;
  logic [10:0] host_um_addr;
  row_bits_t host_in_wdata, host_w_wdata, host_out_rdata;
  logic [31:0] host_um_wdata;
  cfg_t cfg;

  if (FULL) begin : g_dut
    meadow_top dut (.*);
  end else begin : g_dut
    meadow_top #(.LANES(LANES), .Q_PES(Q_PES), .MAX_T(MAX_T), .LN_MAXF(LN_MAXF),
                 .BRAM_DEPTH(BRAM_DEPTH)) dut (.*);
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 3000) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // helpers
  // ------------------------------------------------------------------
  function automatic int rq(longint a, int sh);
    longint r;
    r = (sh == 0) ? a : ((a + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic int byte_at(row_bits_t r, int i);
    logic [7:0] b;
    b = 8'(r >> (i * 8));
    return int'($signed(b));
  endfunction

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

  // ------------------------------------------------------------------
  // data
  // ------------------------------------------------------------------
  logic [31:0] uniq [UNIQ];          // unique chunks, 4 weights each
  int          x_in [MAX_T][D];      // input activations (also GEMM X, LN input)
  int          kmat [MAX_T][64];
  int          vmat [MAX_T][64];
  int          ids [$];              // chunk-ID stream of a weight matrix
  logic [31:0] pkts [$];
  int          n_mode_pk [8];

  // weight of row (j, c), byte i, from the ID stream starting at id0
  function automatic int w_at(int id0, int j, int k);
    int c, i, id;
    c  = k / 64;
    i  = k % 64;
    id = ids[id0 + (j * DCH + c) * 16 + i / 4];
    return int'($signed(uniq[id][(i % 4) * 8 +: 8]));
  endfunction

  // skewed IDs: each pair of rows draws from a band of 2, 4, 16, 256 or 2048 IDs
  task automatic make_ids(int nrows);
    ids.delete();
    for (int r = 0; r < nrows; r += 2) begin
      int band, lim;
      band = $urandom_range(4);
      lim = (band == 0) ? 2 : (band == 1) ? 4 : (band == 2) ? 16 : (band == 3) ? 256 : UNIQ;
      for (int k = 0; k < 32 && (r * 16 + k) < nrows * 16; k++) ids.push_back($urandom_range(lim - 1));
    end
  endtask

  // packet-specific packing, fillers (mode 7) to the end of each 16-packet word
  task automatic pack_ids();
    int i;
    pkts.delete();
    i = 0;
    while (i < ids.size()) begin
      int m, w, n;
      logic [28:0] enc;
      for (m = 0; m <= 4; m++) begin
        bit ok;
        ok = 1;
        w = 1 << m;
        n = 29 / w;
        for (int k = 0; k < n && i + k < ids.size(); k++) if (ids[i + k] >= (1 << w)) ok = 0;
        if (ok) break;
      end
      w = 1 << m; n = 29 / w; enc = '0;
      for (int k = 0; k < n && i + k < ids.size(); k++) enc |= 29'(ids[i + k]) << (k * w);
      pkts.push_back({3'(m), enc});
      n_mode_pk[m]++;
      // sometimes pad the rest of the word early (exercises filler skipping)
      if ($urandom_range(9) == 0) while (pkts.size() % 16 != 0) begin
        pkts.push_back({3'd7, 29'd0});
        n_mode_pk[7]++;
      end
      i += n;
    end
    while (pkts.size() % 16 != 0) begin
      pkts.push_back({3'd7, 29'd0});
      n_mode_pk[7]++;
    end
  endtask

  task automatic write_w(int addr, row_bits_t r);
    #1;
    host_w_we = 1; host_w_addr = AW'(addr); host_w_wdata = r;
    @(posedge clk);
    #1 host_w_we = 0;
  endtask

  task automatic write_in(int addr, row_bits_t r);
    #1;
    host_in_we = 1; host_in_addr = AW'(addr); host_in_wdata = r;
    @(posedge clk);
    #1 host_in_we = 0;
  endtask

  task automatic load_packets(int base);
    for (int wd = 0; wd < pkts.size() / 16; wd++) begin
      row_bits_t r;
      for (int m = 0; m < 16; m++) r[m * 32 +: 32] = pkts[wd * 16 + m];
      write_w(base + wd, r);
    end
  endtask

  task automatic load_inputs(int ntok, int base);
    for (int t = 0; t < ntok; t++)
      for (int c = 0; c < DCH; c++) begin
        row_bits_t r;
        for (int i = 0; i < 64; i++) r[i * 8 +: 8] = 8'(x_in[t][c * 64 + i]);
        write_in(base + t * DCH + c, r);
      end
  endtask

  task automatic read_out(int addr, output row_bits_t r);
    #1;
    host_out_re = 1; host_out_addr = AW'(addr);
    @(posedge clk);
    #1 host_out_re = 0;
    r = host_out_rdata;
  endtask

  task automatic run_job(cfg_t c, output int cycles);
    #1;
    cfg = c;
    start = 1;
    @(posedge clk);
    #1 start = 0;
    cycles = 1;
    @(posedge clk);
    while (!done) begin @(posedge clk); cycles++; end
    @(posedge clk);
  endtask

  // ------------------------------------------------------------------
  // mechanism counters and stream probes
  // ------------------------------------------------------------------
  int n_q_qkt, n_q_smv, n_qkt_sm, n_sm_smv, n_preg_sw, n_wrf_sw, n_kbank_sw;
  int n_cmd_gemm, n_cmd_pipe, n_relu, n_gelu, n_ln_in, n_bad_mode, n_mode_seen [8];
  logic prev_qb, prev_wbank, prev_kbank;
  logic tphs_on;

  always @(posedge clk) if (rst_n) begin
    if (g_dut.dut.wrow_ready && g_dut.dut.u_ctrl.w_re[1]) n_q_qkt++;
    if (g_dut.dut.wrow_ready && g_dut.dut.bc_cmd.valid) n_q_smv++;
    if (g_dut.dut.sm_in_valid[0] && g_dut.dut.u_ctrl.w_re[1]) n_qkt_sm++;
    if (g_dut.dut.sm_out_valid[0] && g_dut.dut.bc_cmd.valid) n_sm_smv++;
    if (g_dut.dut.u_ctrl.qb != prev_qb) n_preg_sw++;
    prev_qb <= g_dut.dut.u_ctrl.qb;
    if (g_dut.dut.wrf_valid) begin
      if (g_dut.dut.wrf_req.bank != prev_wbank) n_wrf_sw++;
      prev_wbank <= g_dut.dut.wrf_req.bank;
    end
    if (g_dut.dut.k_valid) begin
      if (g_dut.dut.k_bank != prev_kbank) n_kbank_sw++;
      prev_kbank <= g_dut.dut.k_bank;
    end
    for (int p = 0; p < NPAR; p++) if (g_dut.dut.par_cmd[p].valid) begin
      if (g_dut.dut.par_cmd[p].mode == MODE_GEMM) n_cmd_gemm++; else n_cmd_pipe++;
    end
    if (g_dut.dut.bc_cmd.valid && g_dut.dut.bc_cmd.mode == MODE_PIPE) n_cmd_pipe++;
    if (g_dut.dut.nl_valid) begin
      if (g_dut.dut.nl_func == NL_RELU) n_relu++; else n_gelu++;
    end
    if (g_dut.dut.ln_in_valid && g_dut.dut.ln_in_ready[0]) n_ln_in++;
    if (g_dut.dut.pkt_valid && g_dut.dut.pkt_ready) n_mode_seen[g_dut.dut.pkt_mode]++;
    if (wilu_bad_mode && g_dut.dut.pkt_mode <= 3'd4) n_bad_mode++;
  end

  // softmax stream capture per lane: scores in, probabilities out
  int sc_obs [LANES][$];
  int pr_obs [LANES][$];
  for (genvar l = 0; l < LANES; l++) begin : g_probe
    always @(posedge clk) if (rst_n && tphs_on) begin
      if (g_dut.dut.g_lane[l].u_sm.in_valid && g_dut.dut.g_lane[l].u_sm.in_ready)
        sc_obs[l].push_back(int'(g_dut.dut.g_lane[l].u_sm.in_data));
      if (g_dut.dut.g_lane[l].u_sm.out_valid)
        pr_obs[l].push_back(int'(g_dut.dut.g_lane[l].u_sm.out_data));
    end
  end

  // ------------------------------------------------------------------
  // jobs
  // ------------------------------------------------------------------
  task automatic tphs_job();
    cfg_t c;
    int cyc, qsh, ssh, osh;
    int q [MAX_T][64];
    int s [MAX_T][MAX_T];
    row_bits_t r;
    qsh = 9; ssh = 10; osh = 7;
    for (int t = 0; t < T; t++) for (int k = 0; k < D; k++) x_in[t][k] = $urandom_range(63) - 32;
    for (int i = 0; i < T; i++) for (int j = 0; j < 64; j++) begin
      kmat[i][j] = int'($signed(8'($urandom())));
      vmat[i][j] = int'($signed(8'($urandom())));
    end
    make_ids(64 * DCH);
    pack_ids();
    load_packets(0);
    load_inputs(T, 0);
    for (int i = 0; i < T; i++) begin
      row_bits_t kr, vr;
      for (int j = 0; j < 64; j++) begin kr[j * 8 +: 8] = 8'(kmat[i][j]); vr[j * 8 +: 8] = 8'(vmat[i][j]); end
      write_w(BRAM_DEPTH / 2 + i, kr);
      write_w(BRAM_DEPTH / 2 + MAX_T + i, vr);
    end
    // reference Q and scores
    for (int t = 0; t < T; t++) begin
      for (int j = 0; j < 64; j++) begin
        longint a;
        a = 0;
        for (int k = 0; k < D; k++) a += longint'(x_in[t][k]) * w_at(0, j, k);
        q[t][j] = rq(a, qsh);
      end
      for (int i = 0; i < T; i++) begin
        longint a;
        a = 0;
        for (int j = 0; j < 64; j++) a += longint'(q[t][j]) * kmat[i][j];
        s[t][i] = rq(a, ssh);
      end
    end
    for (int l = 0; l < LANES; l++) begin sc_obs[l].delete(); pr_obs[l].delete(); end
    c = '0;
    c.job = JOB_TPHS; c.dch = 6'(DCH); c.ntok = 11'(T); c.in_base = 0; c.wq_base = 0;
    c.k_base = 14'(BRAM_DEPTH / 2); c.v_base = 14'(BRAM_DEPTH / 2 + MAX_T);
    c.out_base = 0; c.out_stride = 1; c.q_shift = 5'(qsh); c.s_shift = 5'(ssh); c.o_shift = 5'(osh);
    tphs_on = 1;
    run_job(c, cyc);
    tphs_on = 0;
    $display("TPHS job: T=%0d D=%0d, %0d packets, %0d cycles", T, D, pkts.size(), cyc);
    // check streams and outputs token by token
    for (int t = 0; t < T; t++) begin
      int l, g;
      real m, sum;
      longint acc [64];
      l = t % LANES; g = t / LANES;
      m = -1000.0; sum = 0.0;
      for (int i = 0; i < T; i++) if (s[t][i] > m) m = s[t][i];
      for (int i = 0; i < T; i++) sum += $exp((s[t][i] - m) / 16.0);
      for (int j = 0; j < 64; j++) acc[j] = 0;
      for (int i = 0; i < T; i++) begin
        int so, po, pe;
        real p;
        so = (g * T + i < sc_obs[l].size()) ? sc_obs[l][g * T + i] : 9999;
        po = (g * T + i < pr_obs[l].size()) ? pr_obs[l][g * T + i] : 9999;
        check(so == s[t][i], $sformatf("token %0d score %0d got %0d exp %0d", t, i, so, s[t][i]));
        p = $exp((s[t][i] - m) / 16.0) / sum * 128.0;
        pe = (p >= 127.0) ? 127 : int'($floor(p + 0.5));
        check(po - pe <= 2 && pe - po <= 2, $sformatf("token %0d probability %0d got %0d exp %0d", t, i, po, pe));
        for (int j = 0; j < 64; j++) acc[j] += longint'(po) * vmat[i][j];
      end
      read_out(t, r);
      for (int j = 0; j < 64; j++)
        check(byte_at(r, j) == rq(acc[j], osh), $sformatf("token %0d SMV %0d got %0d exp %0d", t, j, byte_at(r, j), rq(acc[j], osh)));
    end
  endtask

  task automatic gemm_job(bit nl_en, nl_func_e f);
    cfg_t c;
    int cyc, osh, rows;
    row_bits_t r;
    int y [$];
    osh = 9;
    rows = (G_OUT + 63) / 64;
    for (int t = 0; t < G_TOK; t++) for (int k = 0; k < D; k++) x_in[t][k] = $urandom_range(63) - 32;
    make_ids(G_OUT * DCH);
    pack_ids();
    load_packets(0);
    load_inputs(G_TOK, 0);
    c = '0;
    c.job = JOB_GEMM; c.dch = 6'(DCH); c.ntok = 11'(G_TOK); c.nout = 12'(G_OUT);
    c.in_base = 0; c.wq_base = 0; c.out_base = 14'(BRAM_DEPTH / 4); c.out_stride = 14'(rows);
    c.o_shift = 5'(osh); c.nl_en = nl_en; c.nl_func = f;
    run_job(c, cyc);
    $display("GEMM job: %0d tokens x %0d outputs, D=%0d, NL %0d/%0d, %0d cycles", G_TOK, G_OUT, D, nl_en, f, cyc);
    for (int t = 0; t < G_TOK; t++)
      for (int rr = 0; rr < rows; rr++) begin
        read_out(BRAM_DEPTH / 4 + t * rows + rr, r);
        for (int b = 0; b < 64 && rr * 64 + b < G_OUT; b++) begin
          longint a;
          int e, d;
          a = 0;
          for (int k = 0; k < D; k++) a += longint'(x_in[t][k]) * w_at(0, rr * 64 + b, k);
          e = rq(a, osh);
          if (nl_en && f == NL_RELU) e = (e < 0) ? 0 : e;
          if (nl_en && f == NL_GELU) begin
            real v;
            v = e / 16.0;
            v = v * 0.5 * (1.0 + erf_r(v / $sqrt(2.0)));
            e = int'($floor(v * 16.0 + 0.5));
          end
          d = byte_at(r, b) - e;
          check((nl_en && f == NL_GELU) ? (d <= 2 && d >= -2) : (d == 0),
                $sformatf("GEMM token %0d output %0d got %0d exp %0d", t, rr * 64 + b, byte_at(r, b), e));
        end
      end
  endtask

  task automatic ln_job();
    cfg_t c;
    int cyc;
    row_bits_t r;
    for (int t = 0; t < LN_TOK; t++) begin
      int base, spread;
      base = $urandom_range(100) - 50;
      spread = 1 + $urandom_range(50);
      for (int k = 0; k < D; k++) begin
        int v;
        v = base + $urandom_range(2 * spread) - spread;
        x_in[t][k] = (v > 127) ? 127 : (v < -128) ? -128 : v;
      end
    end
    load_inputs(LN_TOK, 0);
    c = '0;
    c.job = JOB_LN; c.dch = 6'(DCH); c.ntok = 11'(LN_TOK); c.in_base = 0;
    c.out_base = 14'(BRAM_DEPTH / 8); c.out_stride = 14'(DCH);
    run_job(c, cyc);
    $display("LN job: %0d tokens of %0d features, %0d cycles", LN_TOK, D, cyc);
    for (int t = 0; t < LN_TOK; t++) begin
      real m, v;
      m = 0; v = 0;
      for (int k = 0; k < D; k++) m += x_in[t][k];
      m = m / D;
      for (int k = 0; k < D; k++) v += (x_in[t][k] - m) * (x_in[t][k] - m);
      v = v / D;
      for (int cc = 0; cc < DCH; cc++) begin
        read_out(BRAM_DEPTH / 8 + t * DCH + cc, r);
        for (int b = 0; b < 64; b++) begin
          real y;
          int e, d;
          y = (v == 0) ? 0.0 : (x_in[t][cc * 64 + b] - m) / $sqrt(v) * 16.0;
          if (y > 127) y = 127;
          if (y < -128) y = -128;
          e = int'($floor(y + 0.5));
          d = byte_at(r, b) - e;
          check(d <= 1 && d >= -1, $sformatf("LN token %0d feature %0d got %0d exp %0d", t, cc * 64 + b, byte_at(r, b), e));
        end
      end
    end
  endtask

  // ------------------------------------------------------------------
  // main sequence
  // ------------------------------------------------------------------
  initial begin
    host_in_we = 0; host_w_we = 0; host_um_we = 0; host_out_re = 0; start = 0; cfg = '0;
    host_in_addr = '0; host_w_addr = '0; host_out_addr = '0; host_um_addr = '0;
    host_in_wdata = '0; host_w_wdata = '0; host_um_wdata = '0;
    tphs_on = 0; prev_qb = 0; prev_wbank = 0; prev_kbank = 0;
    n_q_qkt = 0; n_q_smv = 0; n_qkt_sm = 0; n_sm_smv = 0; n_preg_sw = 0; n_wrf_sw = 0; n_kbank_sw = 0;
    n_cmd_gemm = 0; n_cmd_pipe = 0; n_relu = 0; n_gelu = 0; n_ln_in = 0; n_bad_mode = 0;
    for (int i = 0; i < 8; i++) begin n_mode_pk[i] = 0; n_mode_seen[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // unique chunk table
    for (int u = 0; u < UNIQ; u++) begin
      uniq[u] = $urandom();
      host_um_we <= 1; host_um_addr <= 11'(u); host_um_wdata <= uniq[u];
      @(posedge clk);
    end
    host_um_we <= 0;
    @(posedge clk);

    tphs_job();
    if (DO_GEMM) begin
      gemm_job(1'b0, NL_RELU);
      gemm_job(1'b1, NL_RELU);
      gemm_job(1'b1, NL_GELU);
    end
    if (DO_LN) ln_job();

    $display("mechanisms: Q||QKT %0d, Q||SMV %0d, QKT->SM %0d, SM->SMV %0d, PREG bank switches %0d, WRF bank switches %0d, K bank switches %0d",
             n_q_qkt, n_q_smv, n_qkt_sm, n_sm_smv, n_preg_sw, n_wrf_sw, n_kbank_sw);
    $display("mechanisms: GEMM cmds %0d, PIPE cmds %0d, ReLU rows %0d, GeLU rows %0d, LN inputs %0d, fillers %0d",
             n_cmd_gemm, n_cmd_pipe, n_relu, n_gelu, n_ln_in, n_mode_seen[7]);
    $display("packets per mode 0..4: %0d %0d %0d %0d %0d", n_mode_seen[0], n_mode_seen[1], n_mode_seen[2], n_mode_seen[3], n_mode_seen[4]);
    check(n_q_qkt > 0, "Q stage overlaps QK^T of an earlier group");
    check(n_q_smv > 0, "Q stage overlaps SMxV of an earlier group");
    check(n_qkt_sm > 0, "QK^T streams into softmax");
    check(n_sm_smv > 0, "softmax streams into SMxV");
    check(n_preg_sw > 0, "PREG bank switch");
    check(n_wrf_sw > 0, "weight RF bank switch");
    check(n_kbank_sw > 0, "K row bank switch");
    check(n_cmd_gemm > 0, "GEMM-mode commands");
    check(n_cmd_pipe > 0, "pipeline-mode commands");
    if (DO_GEMM) check(n_relu > 0 && n_gelu > 0, "ReLU and GeLU");
    if (DO_LN) check(n_ln_in > 0, "LN modules fed");
    for (int m = 0; m <= 4; m++) check(n_mode_seen[m] > 0, $sformatf("packets of mode %0d", m));
    check(n_mode_seen[7] > 0, "filler packets skipped");
    check(n_bad_mode == 0, "bad-mode flag only on fillers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
