// meadow_pkg: types and constants shared by the MEADOW accelerator RTL.
//
// Data is W8A8: weights and activations are signed 8-bit integers. A PE
// row (one register-file word, one BRAM word) holds MULTS = 64 bytes, one
// byte per multiplier of a PE. Accumulators are 32 bits wide. These widths
// follow the paper (8-bit quantization, 64 multipliers per PE); the 32-bit
// accumulator and the 512-bit row word are this design's own choices.
package meadow_pkg;

  localparam int unsigned DATA_W = 8;   // W8A8 quantization
  localparam int unsigned MULTS  = 64;  // multipliers per PE (Table 1)
  localparam int unsigned ACC_W  = 32;  // accumulator width (assumed)
  localparam int unsigned ROW_W  = MULTS * DATA_W;  // 512-bit row word

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef data_t                    row_t [MULTS];
  typedef logic [ROW_W-1:0]         row_bits_t;

  // Execution mode of a hybrid PE (Fig 2b mux select)
  typedef enum logic {MODE_GEMM = 1'b0, MODE_PIPE = 1'b1} pe_mode_e;

  // Non-linear function of an NL module
  typedef enum logic {NL_RELU = 1'b0, NL_GELU = 1'b1} nl_func_e;

  // Per-cycle command to a hybrid PE, issued by the controller.
  typedef struct packed {
    logic      valid;   // perform one MAC step this cycle
    logic      first;   // clear the accumulator(s) before this step
    logic      last;    // result is complete after this step
    pe_mode_e  mode;    // GEMM: input from input RF; PIPE: input from PREG
    logic      fwd;     // 1: result goes to the NoC (next stage), 0: to the output RF
    logic      wbank;   // weight RF bank to read
    logic [5:0] waddr;  // weight RF row to read
    logic      ibank;   // input RF bank to read (GEMM)
    logic [5:0] iaddr;  // input RF row to read (GEMM)
    logic      pbank;   // PREG bank to read (PIPE)
    logic [5:0] elem;   // element broadcast by a broadcasting PE
    logic [4:0] shift;  // requantization right shift of the result
  } pe_cmd_t;

  // Requantize an accumulator to int8: arithmetic shift right with
  // round-half-up, then saturate.
  function automatic data_t requant(acc_t a, logic [4:0] sh);
    acc_t r;
    if (sh == 0) r = a;
    else         r = (a + (acc_t'(1) <<< (sh - 1))) >>> sh;
    if (r > 127)       return data_t'(127);
    else if (r < -128) return data_t'(-128);
    else               return data_t'(r[DATA_W-1:0]);
  endfunction

  // NoC destinations of a row write into PE register files
  typedef enum logic [2:0] {
    DST_NONE    = 3'd0,
    DST_PE      = 3'd1,  // one parallel PE, idx = flat PE number
    DST_LANE_Q  = 3'd2,  // all Q-stage PEs of lane idx
    DST_ALL_PAR = 3'd3,  // every parallel PE
    DST_Q_SLOT  = 3'd4,  // Q-stage PE number idx of every lane
    DST_QKT_ALL = 3'd5,  // the QK^T PE of every lane
    DST_BC_ALL  = 3'd6   // the broadcasting PE of every lane
  } noc_dst_e;

  typedef struct packed {
    noc_dst_e   dst;
    logic [6:0] idx;
    logic       bank;
    logic [5:0] addr;
  } noc_wr_t;

  // Controller job types
  typedef enum logic [1:0] {JOB_TPHS = 2'd0, JOB_GEMM = 2'd1, JOB_LN = 2'd2} job_e;

  // Job configuration, held stable from start to done
  typedef struct packed {
    job_e        job;
    logic [5:0]  dch;        // D/64: 64-byte chunks per input token (1..32)
    logic [10:0] ntok;       // tokens: T (TPHS), tokens in the PEs (GEMM), tokens (LN)
    logic [11:0] nout;       // GEMM output features N (1..2048)
    logic [13:0] in_base;    // input BRAM row of token 0, chunk 0
    logic [13:0] wq_base;    // weight BRAM word of the first packed-weight word
    logic [13:0] k_base;     // weight BRAM row of K row 0 (TPHS)
    logic [13:0] v_base;     // weight BRAM row of V row 0 (TPHS)
    logic [13:0] out_base;   // output BRAM row of token 0
    logic [13:0] out_stride; // output BRAM rows per token
    logic [4:0]  q_shift;    // requantization shift of Q (TPHS)
    logic [4:0]  s_shift;    // requantization shift of QK^T scores (TPHS)
    logic [4:0]  o_shift;    // requantization shift of SMxV (TPHS) or GEMM outputs
    logic        nl_en;      // GEMM: pass drained rows through the NL modules
    nl_func_e    nl_func;
  } cfg_t;

endpackage
