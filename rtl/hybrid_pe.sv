// hybrid_pe: hybrid processing element for GEMM and pipelined (TPHS) modes.
//
// The PE holds a weight RF, an input RF, a pipeline register (PREG) and an
// output RF around one MAC core. BROADCAST = 0 builds a Parallel MAC PE
// (pe_parallel_mac, one 64-wide dot product per cycle), BROADCAST = 1 a
// Broadcasting MAC PE (pe_broadcast_mac, 64 accumulators fed one broadcast
// element per cycle). All RFs and the PREG are double-buffered: two banks,
// one filled through the NoC while the other is read.
//
//   GEMM mode: the MAC input comes from the input RF; results are
//              requantized to int8 and appended to the output RF, which the
//              NoC later drains to the output BRAM.
//   PIPE mode: the MAC input comes from the PREG, written by the previous
//              pipeline stage; results leave on res_* towards the next stage
//              (another PE's PREG or a softmax module). The input RF is idle.
// The result destination is selected by cmd.fwd separately from the input
// source, so a TPHS Q-stage PE can read its token from the input RF and still
// forward its results to the next stage.
//
// Interface: row writes into the weight and input RFs (one 64-byte row per
// cycle), byte-masked writes into the PREG, one pe_cmd_t per cycle naming the banks
// and rows to read, a synchronous row read port on the output RF.
// Timing: RF and PREG reads are combinational (LUT registers), so a row or
// byte written in cycle t can be used by a command in cycle t+1; a result
// appears one cycle after the command flagged `last`.
//
// From the paper: the RF/PREG/MAC structure, the GEMM/Pipeline mux, double
// buffering and the 4 KB size of each RF. This design's choices: each 4 KB RF
// is split into two 2 KB banks of RF_ROWS = 32 rows; results are requantized
// to int8 by a per-command right shift; the output RF holds int8 results,
// packed byte after byte (parallel PE) or row after row (broadcasting PE).
module hybrid_pe
  import meadow_pkg::*;
#(
  parameter bit          BROADCAST = 1'b0,
  parameter int unsigned RF_ROWS   = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  // weight RF write (from WILU / weight BRAM through the NoC)
  input  logic       wrf_we,
  input  logic       wrf_bank,
  input  logic [5:0] wrf_addr,
  input  row_bits_t  wrf_data,
  // input RF write (from input BRAM through the NoC)
  input  logic       irf_we,
  input  logic       irf_bank,
  input  logic [5:0] irf_addr,
  input  row_bits_t  irf_data,
  // PREG byte-masked write (from the previous pipeline stage through the NoC)
  input  logic       preg_we,
  input  logic       preg_bank,
  input  logic [MULTS-1:0] preg_mask,
  input  row_bits_t  preg_row,
  // command
  input  pe_cmd_t    cmd,
  // output RF control and read port
  input  logic       orf_clr,     // restart output RF writing at bank orf_wbank, row 0
  input  logic       orf_wbank,
  input  logic       orf_rbank,
  input  logic [5:0] orf_raddr,
  output row_bits_t  orf_rdata,   // one cycle after orf_raddr
  output logic [11:0] orf_count,  // results written since orf_clr
  // pipelined-mode result towards the NoC
  output logic       res_valid,
  output row_bits_t  res_data     // parallel PE: byte 0; broadcasting PE: 64 bytes
);
  localparam int unsigned AW = $clog2(RF_ROWS);

  row_bits_t wrf  [2][RF_ROWS];
  row_bits_t irf  [2][RF_ROWS];
  row_bits_t orf  [2][RF_ROWS];
  row_bits_t preg [2];

  // ---------------- RF / PREG writes ----------------
  always_ff @(posedge clk) begin
    if (wrf_we) wrf[wrf_bank][wrf_addr[AW-1:0]] <= wrf_data;
    if (irf_we) irf[irf_bank][irf_addr[AW-1:0]] <= irf_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      preg[0] <= '0;
      preg[1] <= '0;
    end else if (preg_we) begin
      for (int i = 0; i < int'(MULTS); i++) begin
        if (preg_mask[i]) preg[preg_bank][i*DATA_W +: DATA_W] <= preg_row[i*DATA_W +: DATA_W];
      end
    end
  end

  // ---------------- GEMM / Pipeline input mux ----------------
  row_bits_t w_row, x_row;
  data_t     x_elem;
  always_comb begin
    w_row  = wrf[cmd.wbank][cmd.waddr[AW-1:0]];
    x_row  = (cmd.mode == MODE_PIPE) ? preg[cmd.pbank] : irf[cmd.ibank][cmd.iaddr[AW-1:0]];
    x_elem = data_t'(x_row[cmd.elem*DATA_W +: DATA_W]);
  end

  // ---------------- MAC core ----------------
  logic     mac_valid;
  acc_t     mac_acc [MULTS];
  logic     fwd_q;
  logic [4:0] shift_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_q   <= 1'b0;
      shift_q <= '0;
    end else if (cmd.valid && cmd.last) begin
      fwd_q   <= cmd.fwd;
      shift_q <= cmd.shift;
    end
  end

  generate
    if (BROADCAST) begin : g_bcast
      pe_broadcast_mac #(.N(MULTS)) u_mac (
        .clk, .rst_n, .valid(cmd.valid), .first(cmd.first), .last(cmd.last),
        .a(x_elem), .w(w_row), .out_valid(mac_valid), .out_acc(mac_acc)
      );
    end else begin : g_par
      acc_t sum;
      pe_parallel_mac #(.N(MULTS)) u_mac (
        .clk, .rst_n, .valid(cmd.valid), .first(cmd.first), .last(cmd.last),
        .x(x_row), .w(w_row), .out_valid(mac_valid), .out_acc(sum)
      );
      always_comb begin
        mac_acc[0] = sum;
        for (int i = 1; i < int'(MULTS); i++) mac_acc[i] = '0;
      end
    end
  endgenerate

  // requantized result row
  row_bits_t q_row;
  always_comb begin
    for (int i = 0; i < int'(MULTS); i++) q_row[i*DATA_W +: DATA_W] = requant(mac_acc[i], shift_q);
  end

  assign res_valid = mac_valid && fwd_q;
  assign res_data  = q_row;

  // ---------------- output RF ----------------
  // write pointer counts results; the parallel PE packs bytes, the
  // broadcasting PE whole rows
  logic       obank_q;
  logic [11:0] ocnt_q;
  logic       orf_write;
  assign orf_write = mac_valid && !fwd_q;
  assign orf_count = ocnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obank_q <= 1'b0;
      ocnt_q  <= '0;
    end else if (orf_clr) begin
      obank_q <= orf_wbank;
      ocnt_q  <= '0;
    end else if (orf_write) begin
      ocnt_q <= ocnt_q + 1'b1;
    end
  end

  // parallel PE: bytes are gathered in a staging row that is written back as
  // a whole row after every result, so a partly filled last row is complete
  row_bits_t ostage_q, ostage_next;
  always_comb begin
    ostage_next = (ocnt_q[5:0] == 6'd0) ? '0 : ostage_q;
    ostage_next[ocnt_q[5:0]*DATA_W +: DATA_W] = q_row[DATA_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ostage_q <= '0;
    else if (orf_write && !orf_clr) ostage_q <= ostage_next;
  end

  always_ff @(posedge clk) begin
    if (orf_write && !orf_clr) begin
      if (BROADCAST) orf[obank_q][ocnt_q[AW-1:0]] <= q_row;
      else           orf[obank_q][ocnt_q[AW+5:6]] <= ostage_next;
    end
    orf_rdata <= orf[orf_rbank][orf_raddr[AW-1:0]];
  end

endmodule
