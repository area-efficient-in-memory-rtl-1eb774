// moe_pkg: sizes, types and helper functions shared by the MoE processing-in-memory
// accelerator.
//
// The accelerator holds the 16 experts of one Mixture-of-Experts layer in 256x256 analog
// crossbars (8-bit I/O) and lets GROUP_SIZE crossbars share one set of peripherals (DAC
// drivers, ADCs, accumulator). Numbers that follow the paper: 16 experts, group size 2,
// 256x256 crossbars, 8-bit I/O, 1536 crossbars per layer (96 per expert), 32-byte score
// record per token (16 experts x 16 bit), 32 prompt tokens, top-k capacity.
// Numbers that are this design's own choice are marked "assumed" below.
// Some constants (D_MODEL, NUM_GROUPS and others) are not read by every module; they are
// here as the single record of the layer's sizes and as parameter defaults, so a lint
// run on one module alone reports them as unused.
package moe_pkg;

  // ---- layer organisation ---------------------------------------------------------------
  parameter int unsigned NUM_EXPERTS = 16;            // Llama-MoE-4/16
  parameter int unsigned GROUP_SIZE  = 2;             // experts (crossbars) per peripheral set
  parameter int unsigned NUM_GROUPS  = NUM_EXPERTS / GROUP_SIZE;

  // ---- crossbar geometry ----------------------------------------------------------------
  parameter int unsigned XBAR_ROWS = 256;             // HERMES core: 256 x 256
  parameter int unsigned XBAR_COLS = 256;
  parameter int unsigned DATA_W    = 8;               // 8-bit I/O (DAC input, ADC output, weights assumed 8 bit)
  // 96 crossbars per expert (1536 / 16) split as 16 row tiles (d_model 4096 / 256)
  // by 6 column tiles; the split is assumed.
  parameter int unsigned ROW_TILES = 16;
  parameter int unsigned COL_TILES = 6;
  parameter int unsigned D_MODEL   = ROW_TILES * XBAR_ROWS;   // 4096
  parameter int unsigned D_OUT     = COL_TILES * XBAR_COLS;   // 1536

  // ---- arithmetic widths (assumed) ------------------------------------------------------
  parameter int unsigned PSUM_W    = 2 * DATA_W + $clog2(XBAR_ROWS);  // exact column sum
  parameter int unsigned ADC_SHIFT = 8;               // ADC full scale = column sum >> 8
  parameter int unsigned ACC_W     = DATA_W + $clog2(ROW_TILES) + 1;   // sum of row tiles
  parameter int unsigned SCORE_W   = 16;              // 32 B score record / 16 experts
  parameter int unsigned Y_W       = 24;              // MoE output accumulator

  // ---- routing and caching --------------------------------------------------------------
  parameter int unsigned TOPK      = 8;               // expert capacity k = 32 tokens x 4 / 16
  parameter int unsigned TC_TOPK   = 4;               // experts per token under token choice (4/16)
  parameter int unsigned T_MAX     = 32;              // prompt length of the evaluation
  parameter int unsigned TOK_W     = 8;               // global token id (prompt + generated)
  parameter int unsigned ADDR_W    = 32;              // DRAM byte address

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic        [SCORE_W-1:0] score_t;
  typedef logic        [TOK_W-1:0]   tok_t;

  // One entry of an expert's top-k list (S_prev of the cached gate).
  typedef struct packed {
    logic   valid;
    score_t score;
    tok_t   token;
  } topk_entry_t;

  // Routing of the gate.
  typedef enum logic [0:0] {
    ROUTE_EXPERT_CHOICE = 1'b0,   // every expert takes its top-k tokens (GO cache in use)
    ROUTE_TOKEN_CHOICE  = 1'b1    // every token takes its top-k experts
  } route_mode_e;

  // Scheduling policies of the prefill scheduler.
  typedef enum logic [0:0] {
    SCHED_COMPACT    = 1'b0,   // "C": every group runs its own queue as early as possible
    SCHED_RESCHEDULE = 1'b1    // "O": compact plus idle insertion for token reuse
  } sched_mode_e;

  // DRAM request kinds issued by the GO-cache controller.
  typedef enum logic [1:0] {
    GO_SCORE_WR = 2'd0,   // append the score vector of a token
    GO_OUT_RD   = 2'd1,   // read back the record an expert is about to evict
    GO_OUT_WR   = 2'd2    // write the weighted expert output of a (token, expert) pair
  } go_req_e;

  // Saturate a signed value to a signed DATA_W-bit code.
  function automatic data_t sat_data(input logic signed [47:0] v);
    localparam logic signed [47:0] MaxV = (48'sd1 <<< (DATA_W - 1)) - 1;
    localparam logic signed [47:0] MinV = -(48'sd1 <<< (DATA_W - 1));
    if (v > MaxV)      return data_t'(MaxV);
    else if (v < MinV) return data_t'(MinV);
    else               return data_t'(v);
  endfunction

endpackage
