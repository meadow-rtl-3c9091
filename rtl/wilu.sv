// wilu: weight unpacking and index look-up (WILU) module.
//
// Packed weight packets arrive from the weight BRAM. Each packet is split by
// the mode-aware unpacking module (mau) into chunk IDs; every ID is then looked
// up in the reindexed unique matrix, a table of UNIQ_DEPTH unique chunks of
// CHUNK signed 8-bit weights each. The looked-up chunks are assembled, chunk 0
// in the least significant bytes, into 64-byte weight rows that the NoC
// delivers to PE weight register files.
//
// Interface
//   um_we/um_waddr/um_wdata  load port of the unique matrix (from DRAM/BRAM)
//   pkt_*                    valid/ready stream of packets {mode, enc}
//   row_*                    valid/ready stream of assembled weight rows
//   flush                    drops the partial row, an unread output row and the
//                            rest of the current packet (used after the last
//                            row of a matrix, whose packets may end in padding)
// A packet whose mode gives no IDs (width above PACK_W or ID_W) is skipped;
// the packer uses it to fill unused packet slots of a BRAM word.
// Timing: one ID is looked up per cycle (1-cycle synchronous table read); a
// row of ROW_CHUNKS chunks takes ROW_CHUNKS cycles plus one bubble cycle.
//
// The block structure (MAU, then look-up in the reindexed unique matrix) is
// the paper's. The paper gives no chunk size, table depth, throughput or
// handshake: CHUNK = 4, a 2048-entry table (11-bit IDs), one look-up per cycle
// and the valid/ready streams are this design's choices.
module wilu
  import meadow_pkg::*;
#(
  parameter int unsigned PACK_W     = 29,
  parameter int unsigned MODE_W     = 3,
  parameter int unsigned ID_W       = 11,
  parameter int unsigned CHUNK      = 4,
  parameter int unsigned UNIQ_DEPTH = 2048
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // unique matrix load port
  input  logic                    um_we,
  input  logic [ID_W-1:0]         um_waddr,
  input  logic [CHUNK*DATA_W-1:0] um_wdata,
  // packet stream in
  input  logic                    pkt_valid,
  output logic                    pkt_ready,
  input  logic [MODE_W-1:0]       pkt_mode,
  input  logic [PACK_W-1:0]       pkt_enc,
  input  logic                    flush,
  // weight row stream out
  output logic                    row_valid,
  input  logic                    row_ready,
  output row_bits_t               row_data,
  output logic                    bad_mode
);
  localparam int unsigned ROW_CHUNKS = MULTS / CHUNK;
  localparam int unsigned CNT_W      = $clog2(PACK_W + 1);
  localparam int unsigned POS_W      = $clog2(ROW_CHUNKS);

  // reindexed unique matrix
  logic [CHUNK*DATA_W-1:0] umat [UNIQ_DEPTH];
  logic [CHUNK*DATA_W-1:0] um_rdata;

  // MAU on the incoming packet
  logic [PACK_W-1:0][ID_W-1:0] mau_ids;
  logic [CNT_W-1:0]            mau_count;
  logic                        mau_bad;

  mau #(.PACK_W(PACK_W), .MODE_W(MODE_W), .ID_W(ID_W)) u_mau (
    .mode(pkt_mode), .enc(pkt_enc), .ids(mau_ids), .count(mau_count), .bad_mode(mau_bad)
  );

  // held unpacked packet
  logic [PACK_W-1:0][ID_W-1:0] ids_q;
  logic [CNT_W-1:0]            cnt_q, k_q;
  logic                        have_q;

  // look-up pipeline and row assembly
  logic                    lu_valid_q;      // a table read is in flight
  logic [POS_W-1:0]        pos_q;           // next chunk slot in the row
  row_bits_t               asm_q;
  logic                    arrive_completes;
  logic                    issue;

  assign arrive_completes = lu_valid_q && (pos_q == POS_W'(ROW_CHUNKS - 1));
  assign issue     = have_q && !flush && (!row_valid || row_ready) && !arrive_completes;
  assign pkt_ready = !flush && (!have_q || (issue && (k_q == cnt_q - 1'b1)));
  assign bad_mode  = pkt_valid && mau_bad;

  always_ff @(posedge clk) begin
    if (um_we) umat[um_waddr] <= um_wdata;
    if (issue) um_rdata <= umat[ids_q[k_q]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_q     <= 1'b0;
      ids_q      <= '0;
      cnt_q      <= '0;
      k_q        <= '0;
      lu_valid_q <= 1'b0;
      pos_q      <= '0;
      asm_q      <= '0;
      row_valid  <= 1'b0;
      row_data   <= '0;
    end else begin
      // packet register
      if (flush) begin
        have_q <= 1'b0;
      end else if (pkt_valid && pkt_ready) begin
        have_q <= !mau_bad && (mau_count != 0);
        ids_q  <= mau_ids;
        cnt_q  <= mau_count;
        k_q    <= '0;
      end else if (issue) begin
        k_q <= k_q + 1'b1;
        if (k_q == cnt_q - 1'b1) have_q <= 1'b0;
      end
      lu_valid_q <= issue;

      // output register
      if ((row_valid && row_ready) || flush) row_valid <= 1'b0;

      // row assembly
      if (flush) begin
        pos_q <= '0;
      end else if (lu_valid_q) begin
        asm_q[pos_q * CHUNK * DATA_W +: CHUNK * DATA_W] <= um_rdata;
        if (pos_q == POS_W'(ROW_CHUNKS - 1)) begin
          pos_q     <= '0;
          row_valid <= 1'b1;
          row_data  <= asm_q;
          row_data[pos_q * CHUNK * DATA_W +: CHUNK * DATA_W] <= um_rdata;
        end else begin
          pos_q <= pos_q + 1'b1;
        end
      end
    end
  end

endmodule
