// meadow_noc: interconnect between the BRAMs, the WILU, the PEs and the
// softmax modules.
//
// The PE array is organized in LANES TPHS lanes. Lane l owns Q_PES Q-stage
// parallel PEs, one QK^T parallel PE, one softmax module and one
// broadcasting PE. Parallel PEs are numbered lane by lane:
// p = l*(Q_PES+1) + k, with k = Q_PES the lane's QK^T PE.
//
// Functions:
//  * Row delivery: a row from the input BRAM (input-RF channel) or from the
//    WILU (weight-RF channel) is written into the register files selected
//    by a noc_wr_t request: one PE, the Q PEs of one lane, all parallel PEs,
//    Q PE k of every lane or every QK^T PE (destination decoder). Two more
//    links carry K rows from the weight BRAM to every QK^T PE and V rows to
//    every broadcasting PE, so the Q, QK^T and SMxV stages load weights in
//    the same cycle.
//  * TPHS forwarding (Fig. 3a of the dataflow): each lane's Q-stage results
//    go into its QK^T PE's PREG; QK^T results stream into the lane's
//    softmax module; softmax results are registered for one cycle (one NoC
//    hop) and written into the broadcasting PE's PREG. The PREG byte and
//    bank of each write are chosen by the controller.
//  * Output gather: selects the output-RF read data of parallel PE gsel
//    for the path to the output BRAM.
//
// The paper states only that the NoC carries all these transfers; the
// destination classes, the fixed lane wiring and the one-cycle softmax hop
// are this design's choices. Everything except the softmax hop is
// combinational.
module meadow_noc
  import meadow_pkg::*;
#(
  parameter int unsigned LANES = 12,
  parameter int unsigned Q_PES = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  // row channels
  input  logic       irf_valid,
  input  noc_wr_t    irf_req,
  input  row_bits_t  irf_row,
  input  logic       wrf_valid,       // WILU rows
  input  noc_wr_t    wrf_req,
  input  row_bits_t  wrf_row,
  input  logic       k_valid,         // K rows to every QK^T PE
  input  logic       k_bank,
  input  logic [5:0] k_addr,
  input  row_bits_t  k_row,
  input  logic       v_valid,         // V rows to every broadcasting PE
  input  logic       v_bank,
  input  logic [5:0] v_addr,
  input  row_bits_t  v_row,
  // parallel PE register-file writes
  output logic [LANES*(Q_PES+1)-1:0] par_irf_we,
  output logic       wr_bank_i,
  output logic [5:0] wr_addr_i,
  output row_bits_t  wr_row_i,
  output logic [LANES*(Q_PES+1)-1:0] par_wrf_we,
  output logic       par_wrf_bank [LANES*(Q_PES+1)],
  output logic [5:0] par_wrf_addr [LANES*(Q_PES+1)],
  output row_bits_t  par_wrf_row  [LANES*(Q_PES+1)],
  output logic [LANES-1:0] bc_wrf_we,
  output logic       bc_wrf_bank,
  output logic [5:0] bc_wrf_addr,
  output row_bits_t  bc_wrf_row,
  // TPHS forwarding
  input  logic [LANES*(Q_PES+1)-1:0] par_res_valid,
  input  row_bits_t                  par_res_data [LANES*(Q_PES+1)],
  output logic [LANES-1:0] qkt_preg_we,
  output data_t      qkt_preg_data [LANES],
  output logic [LANES-1:0] sm_in_valid,
  output data_t      sm_in_data [LANES],
  input  logic [LANES-1:0] sm_out_valid,
  input  data_t      sm_out_data [LANES],
  output logic [LANES-1:0] bc_preg_we,
  output data_t      bc_preg_data [LANES],
  // output gather
  input  logic [6:0] gsel,
  input  row_bits_t  par_orf_rdata [LANES*(Q_PES+1)],
  output row_bits_t  gather_row
);
  localparam int unsigned LW   = Q_PES + 1;
  localparam int unsigned NPAR = LANES * LW;

  // destination decoder shared by both row channels
  function automatic logic [NPAR-1:0] dec_par(noc_wr_t r);
    logic [NPAR-1:0] m;
    m = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      for (int k = 0; k < int'(LW); k++) begin
        unique case (r.dst)
          DST_PE:      if (int'(r.idx) == l*int'(LW) + k) m[l*LW+k] = 1'b1;
          DST_LANE_Q:  if (int'(r.idx) == l && k < int'(Q_PES)) m[l*LW+k] = 1'b1;
          DST_ALL_PAR: m[l*LW+k] = 1'b1;
          DST_Q_SLOT:  if (int'(r.idx) == k && k < int'(Q_PES)) m[l*LW+k] = 1'b1;
          DST_QKT_ALL: if (k == int'(Q_PES)) m[l*LW+k] = 1'b1;
          default: ;
        endcase
      end
    end
    return m;
  endfunction

  logic [NPAR-1:0] wilu_we;
  always_comb begin
    par_irf_we = irf_valid ? dec_par(irf_req) : '0;
    wr_bank_i  = irf_req.bank;
    wr_addr_i  = irf_req.addr;
    wr_row_i   = irf_row;
    wilu_we    = wrf_valid ? dec_par(wrf_req) : '0;
    // the QK^T PE of a lane takes K rows from its own link, WILU rows otherwise
    for (int p = 0; p < int'(NPAR); p++) begin
      if (p % int'(LW) == int'(Q_PES) && k_valid) begin
        par_wrf_we[p]   = 1'b1;
        par_wrf_bank[p] = k_bank;
        par_wrf_addr[p] = k_addr;
        par_wrf_row[p]  = k_row;
      end else begin
        par_wrf_we[p]   = wilu_we[p];
        par_wrf_bank[p] = wrf_req.bank;
        par_wrf_addr[p] = wrf_req.addr;
        par_wrf_row[p]  = wrf_row;
      end
    end
    bc_wrf_we   = v_valid ? '1 : '0;
    bc_wrf_bank = v_bank;
    bc_wrf_addr = v_addr;
    bc_wrf_row  = v_row;
  end

  // lane forwarding
  data_t       sm_hop_q   [LANES];
  logic [LANES-1:0] sm_hop_v_q;
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      // Q stage -> QK^T PREG: at most one Q PE of a lane finishes per cycle
      qkt_preg_we[l]   = 1'b0;
      qkt_preg_data[l] = '0;
      for (int k = 0; k < int'(Q_PES); k++) begin
        if (par_res_valid[l*LW+k]) begin
          qkt_preg_we[l]   = 1'b1;
          qkt_preg_data[l] = data_t'(par_res_data[l*LW+k][DATA_W-1:0]);
        end
      end
      // QK^T -> softmax
      sm_in_valid[l] = par_res_valid[l*LW+Q_PES];
      sm_in_data[l]  = data_t'(par_res_data[l*LW+Q_PES][DATA_W-1:0]);
      // softmax -> broadcasting PE PREG (registered hop)
      bc_preg_we[l]   = sm_hop_v_q[l];
      bc_preg_data[l] = sm_hop_q[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sm_hop_v_q <= '0;
      for (int l = 0; l < int'(LANES); l++) sm_hop_q[l] <= '0;
    end else begin
      sm_hop_v_q <= sm_out_valid;
      for (int l = 0; l < int'(LANES); l++) sm_hop_q[l] <= sm_out_data[l];
    end
  end

  assign gather_row = (int'(gsel) < int'(NPAR)) ? par_orf_rdata[gsel] : '0;

endmodule
