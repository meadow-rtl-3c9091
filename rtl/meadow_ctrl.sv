// meadow_ctrl: job sequencer of the MEADOW accelerator.
//
// Runs one job at a time, chosen by cfg.job:
//
// JOB_TPHS  token-parallel head-sequential attention for one head:
//           SMV_t = softmax(Q_t K^T) V with Q_t = IP_t W_Q, for tokens
//           t = 0..T-1, LANES tokens (one group) at a time. Four engines run
//           concurrently on successive groups, so the stages of the dataflow
//           overlap as in the paper's pipeline:
//   Q engine    loads each lane's token into its Q PEs' input RFs, then
//               streams the packed W_Q rows through the WILU; row (j, c) is
//               written into Q PE j mod Q_PES of every lane and multiplied
//               with chunk c of the token; finished q_j go over the NoC into
//               byte j of the lane's QK^T PE PREG (one of two banks).
//   QK^T engine streams K rows from the weight BRAM into the QK^T PEs, one
//               per cycle; each lane produces one score per cycle into its
//               softmax module.
//   softmax     the SM modules pipeline MAX/EXP/DIV across groups.
//   SMxV engine follows the softmax output: probability i and V row i meet
//               in the broadcasting PEs; after T steps each lane holds its
//               token's SMV row, which is written to the output BRAM.
// JOB_GEMM  Y[t][n] = sum_k X[t][k] W[n][k] for up to NPAR tokens: token t
//           sits in parallel PE t's input RF, every packed weight row from the
//           WILU is broadcast to all parallel PEs, results collect in the
//           output RFs and are drained (optionally through the NL modules)
//           to the output BRAM.
// JOB_LN    layer normalization of T tokens of D = 64*dch features from the
//           input BRAM, eight tokens at a time in the eight LN modules.
//
// Memory layouts (rows of 64 bytes): token t chunk c of the input at
// in_base + t*dch + c; K row i at k_base + i and V row i at v_base + i of the
// weight BRAM; packed weights from word wq_base of the weight BRAM, 16
// packets of 32 bits per word, packet m at bits [32m+31:32m] holding
// {mode[2:0], enc[28:0]}; weight rows in order (output j, chunk c), chunk c
// of row j holding W[c*64 .. c*64+63][j]. Output row r of token t at
// out_base + t*out_stride + r.
//
// The paper describes the stages, their order and which PEs run them; the
// engine structure, handshakes, memory layouts and the per-stage timing are
// this design's. Timing: BRAM reads take one cycle, so each K or V row
// reaches its PE two cycles after its read is issued. The Q stage is
// limited by the WILU (one 64-byte row every 17 cycles).
module meadow_ctrl
  import meadow_pkg::*;
#(
  parameter int unsigned LANES   = 12,
  parameter int unsigned Q_PES   = 6,
  parameter int unsigned N_LN    = 8,
  parameter int unsigned RF_ROWS = 32,
  parameter int unsigned MAX_T   = 1024,
  parameter int unsigned LN_MAXF = 2048,
  parameter int unsigned AW      = 14
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg,
  output logic        busy,
  output logic        done,
  // input BRAM read port
  output logic        in_re,
  output logic [AW-1:0] in_raddr,
  input  row_bits_t   in_rdata,
  // weight BRAM read ports: 0 packed weights, 1 K rows, 2 V rows
  output logic [2:0]  w_re,
  output logic [2:0][AW-1:0] w_raddr,
  input  row_bits_t   w_rdata0,
  // WILU
  output logic        pkt_valid,
  input  logic        pkt_ready,
  output logic [2:0]  pkt_mode,
  output logic [28:0] pkt_enc,
  output logic        wilu_flush,
  input  logic        wrow_valid,
  output logic        wrow_ready,
  // NoC row channels
  output logic        irf_valid,
  output noc_wr_t     irf_req,
  output logic        wrf_valid,   // WILU row channel
  output noc_wr_t     wrf_req,
  output logic        k_valid,     // K row (weight BRAM port 1 data) to the QK^T PEs
  output logic        k_bank,
  output logic [5:0]  k_addr,
  output logic        v_valid,     // V row (weight BRAM port 2 data) to the broadcasting PEs
  output logic        v_bank,
  output logic [5:0]  v_addr,
  // PE control
  output pe_cmd_t     par_cmd [LANES*(Q_PES+1)],
  output pe_cmd_t     bc_cmd,
  output logic        qkt_preg_bank,
  output logic [5:0]  qkt_preg_idx,
  output logic        bc_preg_bank,
  output logic [5:0]  bc_preg_idx,
  output logic        orf_clr,
  output logic [5:0]  orf_raddr,
  output logic [6:0]  gsel,
  input  row_bits_t   gather_row,
  input  logic        bc_res_valid,
  input  row_bits_t   bc_res_data [LANES],
  // softmax modules (lane 0 is the timing reference; lanes run in lockstep)
  output logic [$clog2(MAX_T+1)-1:0] sm_feat,
  input  logic        sm_in_ready,
  input  logic        sm_out_valid,
  input  logic [$clog2(MAX_T)-1:0] sm_out_idx,
  input  logic        sm_out_last,
  // NL modules (one 64-byte row per cycle across all of them)
  output logic        nl_valid,
  output row_bits_t   nl_row,
  output nl_func_e    nl_func,
  input  logic        nl_out_valid,
  input  row_bits_t   nl_out_row,
  // LN modules
  output logic [$clog2(LN_MAXF+1)-1:0] ln_feat,
  output logic        ln_in_valid,
  output data_t       ln_in_data [N_LN],
  input  logic        ln_in_ready,
  input  logic        ln_out_valid,
  input  data_t       ln_out_data [N_LN],
  // output BRAM write port
  output logic        out_we,
  output logic [AW-1:0] out_waddr,
  output row_bits_t   out_wdata
);
  localparam int unsigned LW   = Q_PES + 1;
  localparam int unsigned NPAR = LANES * LW;
  localparam int unsigned TW   = $clog2(MAX_T + 1);
  localparam int unsigned RW   = $clog2(RF_ROWS);

  typedef enum logic [1:0] {J_IDLE, J_RUN} jstate_e;
  jstate_e jstate;
  cfg_t    c;               // latched configuration
  logic    job_done;

  // =====================================================================
  // packet feeder: weight BRAM words -> WILU packets
  // =====================================================================
  logic        feed_on, feed_restart;
  logic [AW-1:0] feed_addr;
  logic        word_v, word_pend;
  logic [3:0]  pidx;
  row_bits_t   word_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feed_addr <= '0; word_v <= 1'b0; word_pend <= 1'b0; pidx <= '0; word_q <= '0;
    end else if (feed_restart || !feed_on) begin
      feed_addr <= c.wq_base; word_v <= 1'b0; word_pend <= 1'b0; pidx <= '0;
    end else begin
      if (word_pend) begin
        word_q    <= w_rdata0;
        word_v    <= 1'b1;
        word_pend <= 1'b0;
      end else if (!word_v) begin
        word_pend <= 1'b1;
        feed_addr <= feed_addr + 1'b1;
      end
      if (word_v && pkt_ready) begin
        pidx <= pidx + 1'b1;
        if (pidx == 4'd15) word_v <= 1'b0;
      end
    end
  end

  assign pkt_valid = feed_on && word_v && !wilu_flush;
  assign pkt_mode  = word_q[pidx*32 + 29 +: 3];
  assign pkt_enc   = word_q[pidx*32 +: 29];

  // =====================================================================
  // Q engine (TPHS) and GEMM engine share the input-load / weight-stream
  // machinery: "xs" = stream engine
  // =====================================================================
  typedef enum logic [2:0] {X_IDLE, X_LOAD, X_LOADW, X_COMP, X_TAIL, X_HAND, X_DRAIN} xstate_e;
  xstate_e xs;
  logic [10:0] grp;              // TPHS group / unused in GEMM
  logic [10:0] ld_tok;           // token being loaded (lane or PE number)
  logic [5:0]  ld_c;
  logic        ld_pend;
  logic [10:0] ld_pend_tok;
  logic [5:0]  ld_pend_c;
  logic [17:0] rc;               // weight rows consumed
  logic [11:0] rj;               // output index of the current row
  logic [5:0]  rcc;              // chunk index of the current row
  logic        qb;               // QK^T PREG bank written by the Q engine
  logic [2:0]  tail;
  logic [17:0] rows_needed;
  logic        row_fire;
  logic [10:0] ngroups;

  assign rows_needed = (c.job == JOB_TPHS) ? 18'(c.dch) * 18'd64 : 18'(c.dch) * 18'(c.nout);
  assign wrow_ready  = (xs == X_COMP);
  assign row_fire    = wrow_valid && wrow_ready;
  assign wilu_flush  = row_fire && (rc == rows_needed - 1'b1);
  assign ngroups     = 11'((c.ntok + 11'(LANES) - 1'b1) / 11'(LANES));

  // QK^T engine state visible to the Q engine
  logic k_busy;
  logic k_go;
  logic k_go_bank;

  // command pipeline from the stream engine (one cycle after the row write)
  logic        sc_v, sc_first, sc_last;
  logic [11:0] sc_j;
  logic [5:0]  sc_c;
  logic        sc_wbank;
  logic [RW-1:0] sc_waddr;
  logic        res_v;           // result of a Q-PE command this cycle
  logic [5:0]  res_j;

  // drain (GEMM)
  logic [10:0] dr_tok;
  logic [5:0]  dr_r;
  logic [5:0]  dr_rows;
  logic        dr_v1, dr_v2;
  logic [10:0] dr_tok1, dr_tok2;
  logic [5:0]  dr_r1, dr_r2;
  row_bits_t   dr_row2;
  assign dr_rows = 6'((c.nout + 12'd63) >> 6);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs <= X_IDLE; grp <= '0; ld_tok <= '0; ld_c <= '0; ld_pend <= 1'b0;
      ld_pend_tok <= '0; ld_pend_c <= '0; rc <= '0; rj <= '0; rcc <= '0; qb <= 1'b0;
      tail <= '0; k_go <= 1'b0; k_go_bank <= 1'b0;
      sc_v <= 1'b0; sc_first <= 1'b0; sc_last <= 1'b0; sc_j <= '0; sc_c <= '0;
      sc_wbank <= 1'b0; sc_waddr <= '0; res_v <= 1'b0; res_j <= '0;
      dr_tok <= '0; dr_r <= '0; dr_v1 <= 1'b0; dr_v2 <= 1'b0; dr_tok1 <= '0; dr_tok2 <= '0;
      dr_r1 <= '0; dr_r2 <= '0; dr_row2 <= '0;
    end else begin
      k_go <= 1'b0;
      // input-load pipeline: read issued last cycle lands now
      ld_pend     <= 1'b0;
      // command pipeline
      sc_v     <= row_fire;
      sc_first <= (rcc == '0);
      sc_last  <= (rcc == c.dch - 1'b1);
      sc_j     <= rj;
      sc_c     <= rcc;
      sc_wbank <= rc[RW];
      sc_waddr <= rc[RW-1:0];
      res_v    <= sc_v && sc_last;
      res_j    <= sc_j[5:0];
      // drain pipeline
      dr_v1   <= 1'b0;
      dr_v2   <= dr_v1;
      dr_tok2 <= dr_tok1;
      dr_r2   <= dr_r1;
      dr_row2 <= gather_row;

      unique case (xs)
        X_IDLE: begin
          if (jstate == J_IDLE && start && (cfg.job == JOB_TPHS || cfg.job == JOB_GEMM)) begin
            xs <= X_LOAD; grp <= '0; ld_tok <= '0; ld_c <= '0; qb <= 1'b0;
          end
        end
        X_LOAD: begin
          // one input row per cycle: tokens of this group (TPHS) or all tokens (GEMM)
          ld_pend     <= 1'b1;
          ld_pend_tok <= ld_tok;
          ld_pend_c   <= ld_c;
          if (ld_c == c.dch - 1'b1) begin
            ld_c <= '0;
            if ((c.job == JOB_TPHS && ld_tok == 11'(LANES - 1)) ||
                (c.job == JOB_GEMM && ld_tok == c.ntok - 1'b1)) begin
              xs <= X_LOADW;
            end
            ld_tok <= ld_tok + 1'b1;
          end else begin
            ld_c <= ld_c + 1'b1;
          end
        end
        X_LOADW: begin
          xs <= X_COMP; rc <= '0; rj <= '0; rcc <= '0;
        end
        X_COMP: begin
          if (row_fire) begin
            rc <= rc + 1'b1;
            if (rcc == c.dch - 1'b1) begin
              rcc <= '0;
              rj  <= rj + 1'b1;
            end else begin
              rcc <= rcc + 1'b1;
            end
            if (rc == rows_needed - 1'b1) begin
              xs   <= X_TAIL;
              tail <= 3'd3;
            end
          end
        end
        X_TAIL: begin
          tail <= tail - 1'b1;
          if (tail == 3'd1) begin
            if (c.job == JOB_TPHS) xs <= X_HAND;
            else begin
              xs <= X_DRAIN; dr_tok <= '0; dr_r <= '0;
            end
          end
        end
        X_HAND: begin
          if (!k_busy && !k_go) begin
            k_go      <= 1'b1;
            k_go_bank <= qb;
            qb        <= !qb;
            grp       <= grp + 1'b1;
            ld_tok    <= '0;
            ld_c      <= '0;
            xs        <= (grp + 1'b1 == ngroups) ? X_IDLE : X_LOAD;
          end
        end
        X_DRAIN: begin
          dr_v1   <= 1'b1;
          dr_tok1 <= dr_tok;
          dr_r1   <= dr_r;
          if (dr_r == dr_rows - 1'b1) begin
            dr_r <= '0;
            dr_tok <= dr_tok + 1'b1;
            if (dr_tok == c.ntok - 1'b1) xs <= X_IDLE;
          end else begin
            dr_r <= dr_r + 1'b1;
          end
        end
        default: xs <= X_IDLE;
      endcase
    end
  end

  // input BRAM read for the load phase (also used by the LN engine below)
  logic        ln_re;
  logic [AW-1:0] ln_raddr;
  logic [10:0] ld_abs_tok;
  assign ld_abs_tok = (c.job == JOB_TPHS) ? 11'(grp * 11'(LANES)) + ld_tok : ld_tok;
  assign in_re    = (xs == X_LOAD) || ln_re;
  assign in_raddr = (xs == X_LOAD) ? AW'(c.in_base + AW'(ld_abs_tok) * AW'(c.dch) + AW'(ld_c))
                                   : ln_raddr;

  always_comb begin
    irf_valid    = ld_pend;
    irf_req      = '0;
    irf_req.bank = 1'b0;
    irf_req.addr = ld_pend_c;
    irf_req.idx  = 7'(ld_pend_tok);
    irf_req.dst  = (c.job == JOB_TPHS) ? DST_LANE_Q : DST_PE;
  end

  // =====================================================================
  // QK^T engine (TPHS)
  // =====================================================================
  typedef enum logic [1:0] {K_IDLE, K_WAITSM, K_RUN} kstate_e;
  kstate_e ks;
  logic [TW-1:0] ki;
  logic          kbank;
  logic          k_v1, k_v2;     // K row read in flight / row in RF
  logic [TW-1:0] k_i1, k_i2;
  logic [10:0]   k_groups;

  assign k_busy = (ks != K_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ks <= K_IDLE; ki <= '0; kbank <= 1'b0; k_v1 <= 1'b0; k_v2 <= 1'b0;
      k_i1 <= '0; k_i2 <= '0; k_groups <= '0;
    end else begin
      k_v1 <= 1'b0;
      k_v2 <= k_v1;
      k_i2 <= k_i1;
      if (start && jstate == J_IDLE) k_groups <= '0;
      unique case (ks)
        K_IDLE: if (k_go) begin
          ks    <= K_WAITSM;
          kbank <= k_go_bank;
          ki    <= '0;
        end
        K_WAITSM: if (sm_in_ready) ks <= K_RUN;
        K_RUN: begin
          k_v1 <= 1'b1;
          k_i1 <= ki;
          ki   <= ki + 1'b1;
          if (ki == TW'(c.ntok - 1'b1)) begin
            ks       <= K_IDLE;
            k_groups <= k_groups + 1'b1;
          end
        end
        default: ks <= K_IDLE;
      endcase
    end
  end

  // =====================================================================
  // SMxV engine (TPHS): follows the softmax outputs of lane 0
  // =====================================================================
  logic          v_v1, v_last1;
  logic [TW-1:0] v_i1;
  logic          v_v2, v_last2;
  logic [TW-1:0] v_i2;
  logic [10:0]   v_grp;          // group whose SMV rows are being produced
  logic [10:0]   w_grp;          // group being written to the output BRAM
  logic [LANES-1:0] out_pend;
  row_bits_t     out_hold [LANES];
  logic [10:0]   groups_written;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_v1 <= 1'b0; v_last1 <= 1'b0; v_i1 <= '0; v_v2 <= 1'b0; v_last2 <= 1'b0; v_i2 <= '0;
    end else begin
      v_v1    <= sm_out_valid && (c.job == JOB_TPHS) && (jstate == J_RUN);
      v_last1 <= sm_out_last;
      v_i1    <= TW'(sm_out_idx);
      v_v2    <= v_v1;
      v_last2 <= v_last1;
      v_i2    <= v_i1;
    end
  end

  // output writer: SMV rows (TPHS), drained rows (GEMM), LN rows
  logic [$clog2(LANES)-1:0] wl;
  logic        ln_wr_v;
  logic [AW-1:0] ln_wr_addr;
  row_bits_t   ln_wr_row;
  logic [10:0] w_tok;

  always_comb begin
    wl = '0;
    for (int l = LANES - 1; l >= 0; l--) if (out_pend[l]) wl = ($clog2(LANES))'(l);
    w_tok = 11'(w_grp * 11'(LANES)) + 11'(wl);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_pend <= '0; v_grp <= '0; w_grp <= '0; groups_written <= '0;
      for (int l = 0; l < int'(LANES); l++) out_hold[l] <= '0;
    end else begin
      if (start && jstate == J_IDLE) begin
        v_grp <= '0; w_grp <= '0; groups_written <= '0;
      end
      if (bc_res_valid && c.job == JOB_TPHS) begin
        for (int l = 0; l < int'(LANES); l++) out_hold[l] <= bc_res_data[l];
        out_pend <= '1;
        w_grp    <= v_grp;
        v_grp    <= v_grp + 1'b1;
      end else if (out_pend != '0) begin
        out_pend[wl] <= 1'b0;
        if (out_pend == (LANES)'(1) << wl) groups_written <= groups_written + 1'b1;
      end
    end
  end

  always_comb begin
    out_we    = 1'b0;
    out_waddr = '0;
    out_wdata = '0;
    if (c.job == JOB_TPHS) begin
      out_we    = (out_pend != '0) && (w_tok < c.ntok);
      out_waddr = AW'(c.out_base + AW'(w_tok) * c.out_stride);
      out_wdata = out_hold[wl];
    end else if (c.job == JOB_GEMM) begin
      out_we    = dr_v2;
      out_waddr = AW'(c.out_base + AW'(dr_tok2) * c.out_stride + AW'(dr_r2));
      out_wdata = c.nl_en ? nl_out_row : dr_row2;
    end else begin
      out_we    = ln_wr_v;
      out_waddr = ln_wr_addr;
      out_wdata = ln_wr_row;
    end
  end

  // drain read and NL path
  assign orf_raddr = dr_r;
  assign gsel      = 7'(dr_tok1);   // output-RF data is one cycle behind its address
  assign nl_valid  = dr_v1 && c.nl_en;
  assign nl_row    = gather_row;
  assign nl_func   = c.nl_func;
  assign orf_clr   = start && jstate == J_IDLE;

  // =====================================================================
  // LN engine: eight tokens at a time, lockstep
  // =====================================================================
  typedef enum logic [2:0] {L_IDLE, L_READ, L_GAP, L_FEED, L_WAIT, L_NEXT} lstate_e;
  lstate_e ls;
  logic [10:0] l_grp;
  logic [5:0]  l_c;               // chunk being read / fed
  logic [$clog2(N_LN)-1:0] l_k;   // LN being loaded
  logic        l_rd_v;
  logic [$clog2(N_LN)-1:0] l_rd_k;
  row_bits_t   l_row [N_LN];
  logic [5:0]  l_b;               // byte being fed
  // output side
  logic [5:0]  lo_b;
  logic [5:0]  lo_c;
  row_bits_t   lo_row [N_LN];
  row_bits_t   lo_hold [N_LN];
  logic [N_LN-1:0] lo_pend;
  logic [5:0]  lo_hold_c;
  logic [10:0] lo_grp;
  logic [$clog2(N_LN)-1:0] lo_k;
  logic        l_done_grp;
  logic [10:0] lo_tok;
  logic [10:0] l_ngroups;

  assign l_ngroups = 11'((c.ntok + 11'(N_LN) - 1'b1) / 11'(N_LN));
  assign ln_feat   = ($clog2(LN_MAXF+1))'(32'(c.dch) * 64);
  assign ln_re     = (ls == L_READ);
  assign ln_raddr  = AW'(c.in_base + AW'(11'(l_grp * 11'(N_LN)) + 11'(l_k)) * AW'(c.dch) + AW'(l_c));
  assign ln_in_valid = (ls == L_FEED);

  always_comb begin
    for (int k = 0; k < int'(N_LN); k++) ln_in_data[k] = data_t'(l_row[k][l_b*8 +: 8]);
    lo_k = '0;
    for (int k = N_LN - 1; k >= 0; k--) if (lo_pend[k]) lo_k = ($clog2(N_LN))'(k);
    lo_tok = 11'(lo_grp * 11'(N_LN)) + 11'(lo_k);
  end

  assign ln_wr_v    = (lo_pend != '0) && (lo_tok < c.ntok) && (c.job == JOB_LN);
  assign ln_wr_addr = AW'(c.out_base + AW'(lo_tok) * c.out_stride + AW'(lo_hold_c));
  assign ln_wr_row  = lo_hold[lo_k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= L_IDLE; l_grp <= '0; l_c <= '0; l_k <= '0; l_rd_v <= 1'b0; l_rd_k <= '0; l_b <= '0;
      lo_b <= '0; lo_c <= '0; lo_pend <= '0; lo_hold_c <= '0; lo_grp <= '0; l_done_grp <= 1'b0;
      for (int k = 0; k < int'(N_LN); k++) begin
        l_row[k] <= '0; lo_row[k] <= '0; lo_hold[k] <= '0;
      end
    end else begin
      l_rd_v     <= ln_re;
      l_rd_k     <= l_k;
      l_done_grp <= 1'b0;
      if (l_rd_v) l_row[l_rd_k] <= in_rdata;
      unique case (ls)
        L_IDLE: if (jstate == J_IDLE && start && cfg.job == JOB_LN) begin
          ls <= L_READ; l_grp <= '0; l_c <= '0; l_k <= '0; lo_grp <= '0; lo_c <= '0; lo_b <= '0;
        end
        L_READ: begin
          l_k <= l_k + 1'b1;
          if (l_k == ($clog2(N_LN))'(N_LN - 1)) begin
            ls <= L_GAP; l_b <= '0; l_k <= '0;
          end
        end
        L_GAP: ls <= L_FEED;   // last row read lands in its buffer
        L_FEED: if (ln_in_ready) begin
          l_b <= l_b + 1'b1;
          if (l_b == 6'd63) begin
            if (l_c == c.dch - 1'b1) begin
              l_c <= '0;
              ls  <= L_WAIT;
            end else begin
              l_c <= l_c + 1'b1;
              ls  <= L_READ;
            end
          end
        end
        L_WAIT: if (l_done_grp) ls <= L_NEXT;
        L_NEXT: begin
          if (l_grp + 1'b1 == l_ngroups) ls <= L_IDLE;
          else begin
            ls <= L_READ; l_grp <= l_grp + 1'b1;
          end
        end
        default: ls <= L_IDLE;
      endcase

      // output rows waiting for the write port leave one per cycle
      if (lo_pend != '0) begin
        lo_pend[lo_k] <= 1'b0;
        if (lo_pend == (N_LN)'(1) << lo_k && lo_hold_c == c.dch - 1'b1) lo_grp <= lo_grp + 1'b1;
      end
      // LN output assembly: one byte per cycle per module
      if (ln_out_valid && c.job == JOB_LN) begin
        for (int k = 0; k < int'(N_LN); k++) lo_row[k][lo_b*8 +: 8] <= ln_out_data[k];
        lo_b <= lo_b + 1'b1;
        if (lo_b == 6'd63) begin
          for (int k = 0; k < int'(N_LN); k++) begin
            lo_hold[k] <= lo_row[k];
            lo_hold[k][63*8 +: 8] <= ln_out_data[k];
          end
          lo_pend   <= '1;
          lo_hold_c <= lo_c;
          if (lo_c == c.dch - 1'b1) begin
            lo_c       <= '0;
            l_done_grp <= 1'b1;
          end else begin
            lo_c <= lo_c + 1'b1;
          end
        end
      end
    end
  end

  // =====================================================================
  // PE commands, RF writes and PREG indices
  // =====================================================================
  always_comb begin
    // weight-RF channels: WILU rows (Q / GEMM), K rows, V rows
    wrf_valid    = row_fire;
    wrf_req      = '0;
    wrf_req.dst  = (c.job == JOB_TPHS) ? DST_Q_SLOT : DST_ALL_PAR;
    wrf_req.idx  = 7'(rj % 12'(Q_PES));
    wrf_req.bank = rc[RW];
    wrf_req.addr = 6'(rc[RW-1:0]);
    k_valid      = k_v1;
    k_bank       = k_i1[RW];
    k_addr       = 6'(k_i1[RW-1:0]);
    v_valid      = v_v1;
    v_bank       = v_i1[RW];
    v_addr       = 6'(v_i1[RW-1:0]);

    // weight BRAM reads
    w_re       = '0;
    w_raddr    = '0;
    w_re[0]    = feed_on && !word_v && !word_pend && !feed_restart;
    w_raddr[0] = feed_addr;
    w_re[1]    = (ks == K_RUN);
    w_raddr[1] = AW'(c.k_base + AW'(ki));
    w_re[2]    = sm_out_valid;
    w_raddr[2] = AW'(c.v_base + AW'(sm_out_idx));

    // PREG writes
    qkt_preg_bank = qb;
    qkt_preg_idx  = res_j;
    bc_preg_bank  = v_i1[6];
    bc_preg_idx   = v_i1[5:0];

    // parallel PE commands
    for (int p = 0; p < int'(NPAR); p++) begin
      par_cmd[p] = '0;
      if (c.job == JOB_GEMM) begin
        par_cmd[p].valid = sc_v;
        par_cmd[p].first = sc_first;
        par_cmd[p].last  = sc_last;
        par_cmd[p].mode  = MODE_GEMM;
        par_cmd[p].fwd   = 1'b0;
        par_cmd[p].wbank = sc_wbank;
        par_cmd[p].waddr = 6'(sc_waddr);
        par_cmd[p].iaddr = sc_c;
        par_cmd[p].shift = c.o_shift;
      end else if (p % int'(LW) < int'(Q_PES)) begin
        par_cmd[p].valid = sc_v && (int'(sc_j % 12'(Q_PES)) == p % int'(LW));
        par_cmd[p].first = sc_first;
        par_cmd[p].last  = sc_last;
        par_cmd[p].mode  = MODE_GEMM;      // token from the input RF
        par_cmd[p].fwd   = 1'b1;           // q_j to the QK^T PE PREG
        par_cmd[p].wbank = sc_wbank;
        par_cmd[p].waddr = 6'(sc_waddr);
        par_cmd[p].iaddr = sc_c;
        par_cmd[p].shift = c.q_shift;
      end else begin
        par_cmd[p].valid = k_v2;
        par_cmd[p].first = 1'b1;
        par_cmd[p].last  = 1'b1;
        par_cmd[p].mode  = MODE_PIPE;      // Q from the PREG
        par_cmd[p].fwd   = 1'b1;           // score to the softmax module
        par_cmd[p].wbank = k_i2[RW];
        par_cmd[p].waddr = 6'(k_i2[RW-1:0]);
        par_cmd[p].pbank = kbank;
        par_cmd[p].shift = c.s_shift;
      end
    end

    // broadcasting PE command
    bc_cmd       = '0;
    bc_cmd.valid = v_v2;
    bc_cmd.first = (v_i2 == '0);
    bc_cmd.last  = v_last2;
    bc_cmd.mode  = MODE_PIPE;
    bc_cmd.fwd   = 1'b1;
    bc_cmd.wbank = v_i2[RW];
    bc_cmd.waddr = 6'(v_i2[RW-1:0]);
    bc_cmd.pbank = v_i2[6];
    bc_cmd.elem  = v_i2[5:0];
    bc_cmd.shift = c.o_shift;
  end

  assign sm_feat = TW'(c.ntok);

  // =====================================================================
  // job control
  // =====================================================================
  always_comb begin
    unique case (c.job)
      JOB_TPHS: job_done = (xs == X_IDLE) && (ks == K_IDLE) && (groups_written == ngroups);
      JOB_GEMM: job_done = (xs == X_IDLE) && !dr_v1 && !dr_v2;
      default:  job_done = (ls == L_IDLE) && (lo_pend == '0);
    endcase
  end

  assign feed_on      = (xs == X_LOADW) || (xs == X_COMP);
  assign feed_restart = (xs == X_LOADW);
  assign busy         = (jstate == J_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      jstate <= J_IDLE;
      c      <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (jstate)
        J_IDLE: if (start) begin
          jstate <= J_RUN;
          c      <= cfg;
        end
        J_RUN: if (job_done && !start) begin
          jstate <= J_IDLE;
          done   <= 1'b1;
        end
        default: jstate <= J_IDLE;
      endcase
    end
  end

endmodule
