// pim_pkg: types and constants shared by the HBM-PIM blocks.
//
// The sizes follow the strawman HBM-PIM organisation: a 256-bit DRAM word
// split into eight 32-bit single-precision lanes, 16 PIM registers per ALU,
// a 1024-byte row buffer (32 words of 256 bits), 16 banks per pseudo channel
// with one PIM unit per even/odd bank pair, two pseudo channels per channel
// sharing a command bus. The command encoding, field widths and the DRAM
// timing expressed in controller clock cycles are this design's own choices.
package pim_pkg;

  localparam int unsigned LANES      = 8;              // 32-bit lanes per DRAM word
  localparam int unsigned LANE_W     = 32;             // single precision
  localparam int unsigned WORD_W     = LANES * LANE_W; // 256-bit DRAM word
  localparam int unsigned NUM_REGS   = 16;             // PIM registers per ALU
  localparam int unsigned REG_AW     = $clog2(NUM_REGS);
  localparam int unsigned ROW_BYTES  = 1024;           // row buffer size
  localparam int unsigned COLS       = ROW_BYTES * 8 / WORD_W; // 32 words per row
  localparam int unsigned COL_AW     = $clog2(COLS);
  localparam int unsigned ROW_AW     = 16;             // row address width (assumed)
  localparam int unsigned BANKS_PER_PCH = 16;
  localparam int unsigned BANK_AW    = $clog2(BANKS_PER_PCH);

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LANE_W-1:0] fp32_t;
  typedef logic [REG_AW-1:0] reg_idx_t;
  typedef logic [ROW_AW-1:0] row_t;
  typedef logic [COL_AW-1:0] col_t;
  typedef logic [BANK_AW-1:0] bank_t;

  // Operations of the PIM ALU. Register names follow the pim-MADD form of the
  // orchestration: MADD dst = src1 + k * src0, where k is a scalar sent by the
  // host with the command and applied to every lane.
  typedef enum logic [2:0] {
    PIM_NOP     = 3'd0,
    PIM_MOV_RD  = 3'd1, // register dst <- row buffer word (even or odd bank)
    PIM_MOV_WR  = 3'd2, // row buffer word (even or odd bank) <- register src0
    PIM_ADD     = 3'd3, // dst = src0 + src1
    PIM_SUB     = 3'd4, // dst = src0 - src1
    PIM_MUL     = 3'd5, // dst = k * src0
    PIM_MADD    = 3'd6, // dst = src1 + k * src0
    PIM_MADDSUB = 3'd7  // dst = src1 + k * src0, dst2 = src1 - k * src0 (augmented ALU)
  } pim_op_e;

  typedef struct packed {
    pim_op_e  op;
    logic     odd;   // MOV: 0 = even bank (real parts), 1 = odd bank (imaginary parts)
    reg_idx_t dst;
    reg_idx_t dst2;
    reg_idx_t src0;
    reg_idx_t src1;
    fp32_t    k;     // scalar constant from the host
  } pim_cmd_t;

  // Requests the host places in a channel's memory controller queue.
  typedef enum logic [1:0] {
    REQ_RD  = 2'd0, // host read of one word of one bank
    REQ_WR  = 2'd1, // host write of one word of one bank
    REQ_PIM = 2'd2  // pim command broadcast to every PIM unit of a pseudo channel
  } req_kind_e;

  typedef struct packed {
    req_kind_e kind;
    logic      pch;   // pseudo channel of the channel
    bank_t     bank;  // RD/WR only
    row_t      row;   // RD/WR, PIM MOV
    col_t      col;   // RD/WR, PIM MOV
    word_t     wdata; // WR only
    pim_cmd_t  pim;   // PIM only
  } mem_req_t;

  // Per-bank DRAM commands driven by the controller.
  typedef enum logic [2:0] {
    DRAM_NOP = 3'd0,
    DRAM_ACT = 3'd1,
    DRAM_PRE = 3'd2,
    DRAM_RD  = 3'd3,
    DRAM_WR  = 3'd4
  } dram_cmd_e;

  // Broadcast bus from the controller to one pseudo channel.
  typedef struct packed {
    logic [BANKS_PER_PCH-1:0] act;   // activate row `row` in these banks
    logic [BANKS_PER_PCH-1:0] pre;   // precharge these banks
    logic                     rd;    // host read of bank `bank`
    logic                     wr;    // host write of bank `bank`
    logic                     pim;   // pim command valid (all PIM units)
    bank_t                    bank;
    row_t                     row;
    col_t                     col;
    word_t                    wdata;
    pim_cmd_t                 cmd;
  } pch_bus_t;

  // One-cycle event flags a channel controller reports (for counters).
  typedef struct packed {
    logic act;        // an ACT was issued (one or more banks)
    logic pre;        // a PRE was issued because a different row was open
    logic rd;         // host read issued
    logic wr;         // host write issued
    logic pim;        // pim command broadcast
    logic pim_wait;   // pim command ready but held by the half-rate issue limit
    logic timing_wait;// head held by tRP or tRAS
    logic q_full;     // host request refused because the queue was full
  } ctrl_evt_t;

endpackage
