// Shared types and constants of the speculative-decoding LLM accelerator.
// Queue numbering follows the four workload queues of the out-of-order
// scheduler (transceiver, compute, ReRAM load, external memory). The
// instruction word layout (queue id, 3-bit parent mark, 3-bit daughter mark,
// opcode payload) follows the scheduler's instruction fields; the payload
// width and the opcode meanings are this design's own choice.
package accel_pkg;
  localparam int unsigned NQ       = 4;   // parallel instruction queues
  localparam int unsigned INSTR_W  = 64;  // instruction word width
  localparam int unsigned PAYLOAD_W = INSTR_W - 2 - 3 - 3;

  typedef enum logic [1:0] {
    Q_XCVR  = 2'd0,   // inter-chip transceiver
    Q_COMP  = 2'd1,   // compute (TFTE / LRU / NLPU)
    Q_RLOAD = 2'd2,   // ReRAM codebook load
    Q_EMAC  = 2'd3    // external memory access
  } queue_e;

  typedef struct packed {
    queue_e                 qid;      // [63:62]
    logic [2:0]             par;      // parent queue marks
    logic [2:0]             dau;      // daughter queue marks
    logic [PAYLOAD_W-1:0]   payload;  // unit-specific fields
  } instr_t;

  // Map a 3-bit mark of queue q onto the absolute queue number: bit i names
  // the i-th other queue in ascending order.
  function automatic logic [1:0] mark_to_q(input logic [1:0] q, input logic [1:0] i);
    logic [1:0] r;
    r = i;
    if (r >= q) r = r + 2'd1;
    return r;
  endfunction


  // compute-queue opcodes
  typedef enum logic [2:0] {
    OP_NOP      = 3'd0,
    OP_TFTE     = 3'd1,   // tile-fused GEMV row on all 16 lanes
    OP_LTB_LOAD = 3'd2,   // copy global-token-buffer rows into the LRU buffer
    OP_LRU      = 3'd3,   // two-stage local rotation + INT8 quantization
    OP_NLPU     = 3'd4    // normalization or softmax of one buffer row
  } cop_e;

  typedef struct packed {
    cop_e        op;
    logic [8:0]  gtb_row;     // activation tiles: row of every GTB bank
    logic [7:0]  cb_base;     // codebook entries: WB rows cb_base..+3 of every bank
    logic [15:0] idx;         // 8 x 2-bit codebook indices
    logic [3:0]  fuse_shift;
    logic [4:0]  out_shift;
    logic        relu;
    logic [8:0]  out_row;     // result row in every GTB bank
    logic        pad;
  } op_tfte_t;

  typedef struct packed {
    cop_e        op;
    logic [3:0]  gbank;
    logic [8:0]  grow;
    logic [8:0]  lrow;
    logic [9:0]  n;
    logic [20:0] pad;
  } op_ltb_load_t;

  typedef struct packed {
    cop_e        op;
    logic [2:0]  k;
    logic [5:0]  m;
    logic [8:0]  rows;
    logic [8:0]  hbase;
    logic [8:0]  sbase;
    logic [15:0] scale_q15;
    logic        pad;
  } op_lru_t;

  typedef struct packed {
    cop_e        op;
    logic        softmax;     // 0: RMS normalization, 1: softmax
    logic [3:0]  gbank;
    logic [8:0]  src_row;
    logic [8:0]  dst_row;
    logic [29:0] pad;
  } op_nlpu_t;

  typedef struct packed {
    logic [14:0] rr_base;
    logic [3:0]  wb_bank;
    logic [7:0]  wb_base;
    logic [8:0]  n_rows;
    logic [19:0] pad;
  } op_rload_t;

  typedef struct packed {
    logic        dir;         // 0: DRAM -> buffer, 1: buffer -> DRAM
    logic [23:0] dram_base;
    logic        buf_sel;     // 0: global token buffer, 1: weight buffer
    logic [12:0] buf_base;    // {bank, row}
    logic [13:0] nrows;
    logic [2:0]  pad;
  } op_emac_t;

  typedef struct packed {
    logic        dir;         // 0: receive, 1: send
    logic [12:0] buf_base;
    logic [13:0] nrows;
    logic [27:0] pad;
  } op_xcvr_t;

  // APSD operating modes
  typedef enum logic [1:0] {
    M_IDLE     = 2'd0,
    M_DRAFT    = 2'd1,  // non-parallel short draft length drafting
    M_VERIFY   = 2'd2,  // TLM verification of the short draft
    M_PARALLEL = 2'd3   // parallel draft-and-verify, long draft length
  } apsd_mode_e;
endpackage
