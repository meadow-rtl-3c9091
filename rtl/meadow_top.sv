// meadow_top: MEADOW tiled LLM accelerator.
//
// A tile of LANES TPHS lanes plus shared memories and post-processing:
//   * input, weight and output BRAMs (1 MB each, 64-byte words), loaded and
//     unloaded by the host through the host_* ports (the off-chip DRAM side);
//   * the WILU, which turns packed weight packets from the weight BRAM into
//     64-byte weight rows through the reindexed unique matrix;
//   * LANES*(Q_PES+1) parallel-MAC hybrid PEs (84 by default) and LANES
//     broadcasting-MAC hybrid PEs (12), each with 64 multipliers;
//   * LANES softmax modules, N_LN layer-norm modules, N_NL activation modules;
//   * the NoC connecting all of them, and the controller (meadow_ctrl).
// Each lane runs one token of the TPHS attention pipeline:
//   Q PEs (Q = IP W_Q) -> QK^T PE -> softmax module -> broadcasting PE (SMxV),
// and in GEMM mode all parallel PEs compute together, one token per PE.
//
// Operation: load the BRAMs and the unique matrix through the host ports,
// set cfg and pulse start; busy stays high until the one-cycle done pulse;
// results are then read from the output BRAM (host_out_rdata one cycle after
// host_out_addr). The job types and memory layouts are described in
// meadow_ctrl.
//
// Numbers from the paper: 84 parallel and 12 broadcasting PEs, 64
// multipliers per PE, 8 LN and 8 ReLU/GeLU modules, 1 MB BRAMs and 4 KB RFs.
// This design's choices: the grouping of the PEs into 12 lanes of six Q PEs,
// one QK^T PE and one broadcasting PE, one softmax module per lane (the paper
// lists 84), and everything listed as such in the submodules.
module meadow_top
  import meadow_pkg::*;
#(
  parameter int unsigned LANES      = 12,
  parameter int unsigned Q_PES      = 6,
  parameter int unsigned N_LN       = 8,
  parameter int unsigned N_NL       = 8,
  parameter int unsigned RF_ROWS    = 32,
  parameter int unsigned MAX_T      = 1024,
  parameter int unsigned LN_MAXF    = 2048,
  parameter int unsigned BRAM_DEPTH = 16384,
  parameter int unsigned UNIQ_DEPTH = 2048
) (
  input  logic       clk,
  input  logic       rst_n,
  // host (off-chip DRAM side) access to the BRAMs
  input  logic       host_in_we,
  input  logic [$clog2(BRAM_DEPTH)-1:0] host_in_addr,
  input  row_bits_t  host_in_wdata,
  input  logic       host_w_we,
  input  logic [$clog2(BRAM_DEPTH)-1:0] host_w_addr,
  input  row_bits_t  host_w_wdata,
  input  logic       host_um_we,
  input  logic [$clog2(UNIQ_DEPTH)-1:0] host_um_addr,
  input  logic [31:0] host_um_wdata,
  input  logic       host_out_re,
  input  logic [$clog2(BRAM_DEPTH)-1:0] host_out_addr,
  output row_bits_t  host_out_rdata,
  // job control
  input  logic       start,
  input  cfg_t       cfg,
  output logic       busy,
  output logic       done,
  output logic       wilu_bad_mode
);
  localparam int unsigned LW   = Q_PES + 1;
  localparam int unsigned NPAR = LANES * LW;
  localparam int unsigned AW   = $clog2(BRAM_DEPTH);
  localparam int unsigned IDW  = $clog2(UNIQ_DEPTH);

  // ---------------- BRAMs ----------------
  logic              in_re;
  logic [AW-1:0]     in_raddr;
  row_bits_t         in_rdata;
  logic [2:0]        w_re;
  logic [2:0][AW-1:0] w_raddr;
  logic [2:0][ROW_W-1:0] w_rdata;
  logic              out_we;
  logic [AW-1:0]     out_waddr;
  row_bits_t         out_wdata;

  bram_sdp #(.WIDTH(ROW_W), .DEPTH(BRAM_DEPTH), .NRD(1)) u_in_bram (
    .clk, .we(host_in_we), .waddr(host_in_addr), .wdata(host_in_wdata),
    .re(in_re), .raddr(in_raddr), .rdata(in_rdata)
  );
  bram_sdp #(.WIDTH(ROW_W), .DEPTH(BRAM_DEPTH), .NRD(3)) u_w_bram (
    .clk, .we(host_w_we), .waddr(host_w_addr), .wdata(host_w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata)
  );
  bram_sdp #(.WIDTH(ROW_W), .DEPTH(BRAM_DEPTH), .NRD(1)) u_out_bram (
    .clk, .we(out_we), .waddr(out_waddr), .wdata(out_wdata),
    .re(host_out_re), .raddr(host_out_addr), .rdata(host_out_rdata)
  );

  // ---------------- WILU ----------------
  logic        pkt_valid, pkt_ready, wilu_flush, wrow_valid, wrow_ready;
  logic [2:0]  pkt_mode;
  logic [28:0] pkt_enc;
  row_bits_t   wrow;

  wilu #(.PACK_W(29), .MODE_W(3), .ID_W(IDW), .CHUNK(4), .UNIQ_DEPTH(UNIQ_DEPTH)) u_wilu (
    .clk, .rst_n,
    .um_we(host_um_we), .um_waddr(host_um_addr), .um_wdata(host_um_wdata),
    .pkt_valid, .pkt_ready, .pkt_mode, .pkt_enc, .flush(wilu_flush),
    .row_valid(wrow_valid), .row_ready(wrow_ready), .row_data(wrow), .bad_mode(wilu_bad_mode)
  );

  // ---------------- controller ----------------
  logic       irf_valid, wrf_valid, k_valid, k_bank, v_valid, v_bank;
  noc_wr_t    irf_req, wrf_req;
  logic [5:0] k_addr, v_addr;
  pe_cmd_t    par_cmd [NPAR];
  pe_cmd_t    bc_cmd;
  logic       qkt_preg_bank, bc_preg_bank, orf_clr;
  logic [5:0] qkt_preg_idx, bc_preg_idx, orf_raddr;
  logic [6:0] gsel;
  row_bits_t  gather_row;
  logic [LANES-1:0] bc_res_valid;
  row_bits_t  bc_res_data [LANES];
  logic [$clog2(MAX_T+1)-1:0] sm_feat;
  logic [LANES-1:0] sm_in_ready, sm_out_valid, sm_out_last;
  logic [$clog2(MAX_T)-1:0]   sm_out_idx [LANES];
  data_t      sm_out_data [LANES];
  logic       nl_valid;
  row_bits_t  nl_row, nl_out_row;
  nl_func_e   nl_func;
  logic [N_NL-1:0] nl_out_valid;
  logic [$clog2(LN_MAXF+1)-1:0] ln_feat;
  logic       ln_in_valid;
  data_t      ln_in_data [N_LN];
  data_t      ln_out_data [N_LN];
  logic [N_LN-1:0] ln_in_ready, ln_out_valid, ln_out_last;

  meadow_ctrl #(
    .LANES(LANES), .Q_PES(Q_PES), .N_LN(N_LN), .RF_ROWS(RF_ROWS), .MAX_T(MAX_T),
    .LN_MAXF(LN_MAXF), .AW(AW)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .in_re, .in_raddr, .in_rdata,
    .w_re, .w_raddr, .w_rdata0(w_rdata[0]),
    .pkt_valid, .pkt_ready, .pkt_mode, .pkt_enc, .wilu_flush, .wrow_valid, .wrow_ready,
    .irf_valid, .irf_req, .wrf_valid, .wrf_req,
    .k_valid, .k_bank, .k_addr, .v_valid, .v_bank, .v_addr,
    .par_cmd, .bc_cmd, .qkt_preg_bank, .qkt_preg_idx, .bc_preg_bank, .bc_preg_idx,
    .orf_clr, .orf_raddr, .gsel, .gather_row,
    .bc_res_valid(bc_res_valid[0]), .bc_res_data,
    .sm_feat, .sm_in_ready(sm_in_ready[0]), .sm_out_valid(sm_out_valid[0]),
    .sm_out_idx(sm_out_idx[0]), .sm_out_last(sm_out_last[0]),
    .nl_valid, .nl_row, .nl_func, .nl_out_valid(nl_out_valid[0]), .nl_out_row,
    .ln_feat, .ln_in_valid, .ln_in_data, .ln_in_ready(ln_in_ready[0]),
    .ln_out_valid(ln_out_valid[0]), .ln_out_data,
    .out_we, .out_waddr, .out_wdata
  );

  // ---------------- NoC ----------------
  logic [NPAR-1:0] par_irf_we, par_wrf_we, par_res_valid;
  logic            wr_bank_i;
  logic [5:0]      wr_addr_i;
  row_bits_t       wr_row_i;
  logic            par_wrf_bank [NPAR];
  logic [5:0]      par_wrf_addr [NPAR];
  row_bits_t       par_wrf_row  [NPAR];
  logic [LANES-1:0] bc_wrf_we;
  logic            bc_wrf_bank;
  logic [5:0]      bc_wrf_addr;
  row_bits_t       bc_wrf_row;
  row_bits_t       par_res_data [NPAR];
  row_bits_t       par_orf_rdata [NPAR];
  logic [LANES-1:0] qkt_preg_we, sm_in_valid, bc_preg_we;
  data_t           qkt_preg_data [LANES];
  data_t           sm_in_data [LANES];
  data_t           bc_preg_data [LANES];

  meadow_noc #(.LANES(LANES), .Q_PES(Q_PES)) u_noc (
    .clk, .rst_n,
    .irf_valid, .irf_req, .irf_row(in_rdata),
    .wrf_valid, .wrf_req, .wrf_row(wrow),
    .k_valid, .k_bank, .k_addr, .k_row(w_rdata[1]),
    .v_valid, .v_bank, .v_addr, .v_row(w_rdata[2]),
    .par_irf_we, .wr_bank_i, .wr_addr_i, .wr_row_i,
    .par_wrf_we, .par_wrf_bank, .par_wrf_addr, .par_wrf_row,
    .bc_wrf_we, .bc_wrf_bank, .bc_wrf_addr, .bc_wrf_row,
    .par_res_valid, .par_res_data,
    .qkt_preg_we, .qkt_preg_data, .sm_in_valid, .sm_in_data,
    .sm_out_valid, .sm_out_data, .bc_preg_we, .bc_preg_data,
    .gsel, .par_orf_rdata, .gather_row
  );

  // ---------------- PE array and softmax modules ----------------
  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    for (genvar k = 0; k < int'(LW); k++) begin : g_par
      localparam int unsigned P = l * LW + k;
      logic [11:0] orf_count;
      hybrid_pe #(.BROADCAST(1'b0), .RF_ROWS(RF_ROWS)) u_pe (
        .clk, .rst_n,
        .wrf_we(par_wrf_we[P]), .wrf_bank(par_wrf_bank[P]), .wrf_addr(par_wrf_addr[P]),
        .wrf_data(par_wrf_row[P]),
        .irf_we(par_irf_we[P]), .irf_bank(wr_bank_i), .irf_addr(wr_addr_i), .irf_data(wr_row_i),
        .preg_we((k == int'(Q_PES)) ? qkt_preg_we[l] : 1'b0),
        .preg_bank(qkt_preg_bank), .preg_mask(MULTS'(1) << qkt_preg_idx),
        .preg_row({MULTS{qkt_preg_data[l]}}),
        .cmd(par_cmd[P]),
        .orf_clr, .orf_wbank(1'b0), .orf_rbank(1'b0), .orf_raddr, .orf_rdata(par_orf_rdata[P]),
        .orf_count,
        .res_valid(par_res_valid[P]), .res_data(par_res_data[P])
      );
    end

    logic [11:0] bc_orf_count;
    row_bits_t   bc_orf_rdata;
    hybrid_pe #(.BROADCAST(1'b1), .RF_ROWS(RF_ROWS)) u_bc_pe (
      .clk, .rst_n,
      .wrf_we(bc_wrf_we[l]), .wrf_bank(bc_wrf_bank), .wrf_addr(bc_wrf_addr), .wrf_data(bc_wrf_row),
      .irf_we(1'b0), .irf_bank(1'b0), .irf_addr(6'd0), .irf_data('0),
      .preg_we(bc_preg_we[l]), .preg_bank(bc_preg_bank), .preg_mask(MULTS'(1) << bc_preg_idx),
      .preg_row({MULTS{bc_preg_data[l]}}),
      .cmd(bc_cmd),
      .orf_clr, .orf_wbank(1'b0), .orf_rbank(1'b0), .orf_raddr(6'd0), .orf_rdata(bc_orf_rdata),
      .orf_count(bc_orf_count),
      .res_valid(bc_res_valid[l]), .res_data(bc_res_data[l])
    );

    softmax_sm #(.MAX_F(MAX_T)) u_sm (
      .clk, .rst_n, .feat(sm_feat),
      .in_valid(sm_in_valid[l]), .in_ready(sm_in_ready[l]), .in_data(sm_in_data[l]),
      .out_valid(sm_out_valid[l]), .out_data(sm_out_data[l]), .out_idx(sm_out_idx[l]),
      .out_last(sm_out_last[l])
    );
  end

  // ---------------- NL modules: one 64-byte row per cycle ----------------
  localparam int unsigned NL_E = MULTS / N_NL;
  for (genvar n = 0; n < int'(N_NL); n++) begin : g_nl
    nl_unit #(.ELEMS(NL_E)) u_nl (
      .clk, .rst_n, .in_valid(nl_valid), .func(nl_func),
      .in_data(nl_row[n*NL_E*DATA_W +: NL_E*DATA_W]),
      .out_valid(nl_out_valid[n]), .out_data(nl_out_row[n*NL_E*DATA_W +: NL_E*DATA_W])
    );
  end

  // ---------------- LN modules ----------------
  for (genvar n = 0; n < int'(N_LN); n++) begin : g_ln
    layernorm_ln #(.MAX_F(LN_MAXF)) u_ln (
      .clk, .rst_n, .feat(ln_feat),
      .in_valid(ln_in_valid), .in_ready(ln_in_ready[n]), .in_data(ln_in_data[n]),
      .out_valid(ln_out_valid[n]), .out_data(ln_out_data[n]), .out_last(ln_out_last[n])
    );
  end

endmodule
