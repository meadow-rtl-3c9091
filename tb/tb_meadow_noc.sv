// tb_meadow_noc: self-checking test of the interconnect.
// Uses 3 lanes of 2 Q PEs (9 parallel PEs). Random requests on the
// input-RF and weight-RF channels are checked against an independent
// model of each destination class (one PE, the Q PEs of a lane, all
// parallel PEs, Q PE k of every lane, every QK^T PE); K rows must take
// priority on the QK^T PEs' weight port; V rows must reach every
// broadcasting PE. TPHS forwarding: Q-stage results go to the lane's QK^T
// PREG in the same cycle, QK^T results to the lane's softmax module in the
// same cycle, softmax results to the broadcasting PE's PREG one cycle later.
// Also checks the output gather multiplexer.
module tb_meadow_noc;
  import meadow_pkg::*;
  localparam int L = 3, Q = 2, LW = Q + 1, NP = L * LW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic irf_valid, wrf_valid, k_valid, v_valid, k_bank, v_bank;
  noc_wr_t irf_req, wrf_req;
  row_bits_t irf_row, wrf_row, k_row, v_row;
  logic [5:0] k_addr, v_addr;
  logic [NP-1:0] par_irf_we, par_wrf_we, par_res_valid;
  logic wr_bank_i;
  logic [5:0] wr_addr_i;
  row_bits_t wr_row_i;
  logic par_wrf_bank [NP];
  logic [5:0] par_wrf_addr [NP];
  row_bits_t par_wrf_row [NP];
  logic [L-1:0] bc_wrf_we, qkt_preg_we, sm_in_valid, sm_out_valid, bc_preg_we;
  logic bc_wrf_bank;
  logic [5:0] bc_wrf_addr;
  row_bits_t bc_wrf_row;
  row_bits_t par_res_data [NP];
  row_bits_t par_orf_rdata [NP];
  data_t qkt_preg_data [L], sm_in_data [L], sm_out_data [L], bc_preg_data [L];
  logic [6:0] gsel;
  row_bits_t gather_row;

  meadow_noc #(.LANES(L), .Q_PES(Q)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic row_bits_t rand_row();
    row_bits_t r;
    for (int i = 0; i < 16; i++) r[i*32 +: 32] = $urandom();
    return r;
  endfunction

  // independent reference: does request r select parallel PE (lane l, slot k)?
  function automatic bit sel(noc_wr_t r, int l, int k);
    case (r.dst)
      DST_PE:      return int'(r.idx) == l * LW + k;
      DST_LANE_Q:  return int'(r.idx) == l && k < Q;
      DST_ALL_PAR: return 1'b1;
      DST_Q_SLOT:  return int'(r.idx) == k && k < Q;
      DST_QKT_ALL: return k == Q;
      default:     return 1'b0;
    endcase
  endfunction

  function automatic noc_wr_t rand_req();
    noc_wr_t r;
    r.dst  = noc_dst_e'($urandom_range(6));
    r.idx  = 7'($urandom_range(NP));
    r.bank = 1'($urandom());
    r.addr = 6'($urandom());
    return r;
  endfunction

  data_t prev_sm [L];
  logic [L-1:0] prev_sm_v;
  int n_cls [7];

  initial begin
    irf_valid = 0; wrf_valid = 0; k_valid = 0; v_valid = 0; k_bank = 0; v_bank = 0;
    irf_req = '0; wrf_req = '0; irf_row = '0; wrf_row = '0; k_row = '0; v_row = '0;
    k_addr = 0; v_addr = 0; par_res_valid = '0; gsel = 0; sm_out_valid = '0;
    for (int p = 0; p < NP; p++) begin par_res_data[p] = '0; par_orf_rdata[p] = '0; end
    for (int l = 0; l < L; l++) sm_out_data[l] = '0;
    for (int i = 0; i < 7; i++) n_cls[i] = 0;
    prev_sm_v = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      irf_valid = $urandom_range(1); irf_req = rand_req(); irf_row = rand_row();
      wrf_valid = $urandom_range(1); wrf_req = rand_req(); wrf_row = rand_row();
      k_valid = ($urandom_range(3) == 0); k_bank = 1'($urandom()); k_addr = 6'($urandom()); k_row = rand_row();
      v_valid = $urandom_range(1); v_bank = 1'($urandom()); v_addr = 6'($urandom()); v_row = rand_row();
      n_cls[int'(irf_req.dst)]++;
      // at most one Q PE per lane finishes per cycle
      par_res_valid = '0;
      for (int l = 0; l < L; l++) begin
        int k;
        k = $urandom_range(Q + 1);
        if (k < Q) par_res_valid[l * LW + k] = 1'b1;
        if ($urandom_range(1)) par_res_valid[l * LW + Q] = 1'b1;
      end
      for (int p = 0; p < NP; p++) begin par_res_data[p] = rand_row(); par_orf_rdata[p] = rand_row(); end
      gsel = 7'($urandom_range(NP));
      sm_out_valid = L'($urandom());
      for (int l = 0; l < L; l++) sm_out_data[l] = data_t'($urandom());
      #1;
      for (int l = 0; l < L; l++)
        for (int k = 0; k < LW; k++) begin
          int p;
          bit kq;
          p = l * LW + k;
          kq = (k == Q) && k_valid;
          check(par_irf_we[p] == (irf_valid && sel(irf_req, l, k)), $sformatf("input RF enable PE %0d dst %0d", p, irf_req.dst));
          check(par_wrf_we[p] == (kq || (wrf_valid && sel(wrf_req, l, k))), $sformatf("weight RF enable PE %0d", p));
          if (kq) check(par_wrf_row[p] == k_row && par_wrf_addr[p] == k_addr && par_wrf_bank[p] == k_bank, "K row to QK^T PE");
          else if (par_wrf_we[p]) check(par_wrf_row[p] == wrf_row && par_wrf_addr[p] == wrf_req.addr && par_wrf_bank[p] == wrf_req.bank, "WILU row");
        end
      check(wr_row_i == irf_row && wr_addr_i == irf_req.addr && wr_bank_i == irf_req.bank, "input RF row bus");
      check(bc_wrf_we == (v_valid ? '1 : '0) && (!v_valid || (bc_wrf_row == v_row && bc_wrf_addr == v_addr && bc_wrf_bank == v_bank)), "V rows");
      for (int l = 0; l < L; l++) begin
        bit qv;
        data_t qd;
        qv = 0; qd = '0;
        for (int k = 0; k < Q; k++) if (par_res_valid[l * LW + k]) begin qv = 1; qd = data_t'(par_res_data[l * LW + k][7:0]); end
        check(qkt_preg_we[l] == qv && (!qv || qkt_preg_data[l] == qd), "Q result to QK^T PREG");
        check(sm_in_valid[l] == par_res_valid[l * LW + Q] && (!sm_in_valid[l] || sm_in_data[l] == data_t'(par_res_data[l * LW + Q][7:0])), "QK^T result to softmax");
        check(bc_preg_we[l] == prev_sm_v[l] && (!prev_sm_v[l] || bc_preg_data[l] == prev_sm[l]), "softmax result to SMxV PREG one cycle later");
      end
      check(gather_row == ((gsel < NP) ? par_orf_rdata[gsel] : '0), "output gather");
      prev_sm_v = sm_out_valid;
      for (int l = 0; l < L; l++) prev_sm[l] = sm_out_data[l];
    end
    for (int i = 0; i < 7; i++) check(n_cls[i] > 0, $sformatf("destination class %0d exercised", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
