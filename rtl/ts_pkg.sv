// ts_pkg -- constants, types and layout functions shared by the TokenStack
// stack RTL.
//
// Sizes that the paper states are used as defaults: head dimension d = 128
// (hidden 12288 / 96 heads of GPT-175B and Devstral-123B), about B = 256
// compute-layer PIM banks, T_page = 16-token pages (the traces hash KV blocks
// at 16-token granularity), 32 capacity-layer banks (banks 0..31 of the
// capacity-layer drawing), eight cards per node (DGX-A100) and four request
// categories (API, text, code, thinking). Everything else here (context
// window, block size, number of logical blocks, field widths) is this design's
// own choice.
//
// The layout functions are the paper's: token n's Key lives in bank n mod B,
// Value dimension j lives in bank j mod B, and page p of a block goes to
// capacity bank p mod B_cap.
package ts_pkg;
  import ts_fp16_pkg::*;

  // ---- sizes ------------------------------------------------------------
  localparam int D_HEAD      = 128;   // head dimension d
  localparam int B_PIM       = 256;   // compute-layer PIM banks B
  localparam int L_MAX       = 8192;  // context window held in compute layers (tokens)
  localparam int T_PAGE      = 16;    // tokens per page
  localparam int BLOCK_PAGES = 4;     // pages per logical KV block
  localparam int B_CAP       = 32;    // capacity-layer banks
  localparam int QGROUP      = 32;    // quantization group (elements of one token)
  localparam int N_CAT       = 4;     // request categories
  localparam int N_CARDS     = 8;     // cards in the node
  localparam int NUM_BLOCKS  = 1024;  // logical KV blocks tracked by one stack
  localparam int F_BINS      = 64;    // entries of each reuse CDF table
  localparam int CAP_AW      = 24;    // capacity-layer word address width per bank

  // ---- capacity-layer page format (64-bit words) --------------------------
  // words [0, EXP_WORDS)            : group exponents, 8 bits each, 8 per word,
  //                                   K groups first, then V groups
  // words [EXP_WORDS, +K_WORDS)     : Keys, INT8, 8 per word, token-first
  // words [.., +V_WORDS)            : Values, INT4, 16 per word, token-first
  function automatic int exp_words(input int tp, input int d, input int g);
    return (2 * tp * (d / g) + 7) / 8;
  endfunction
  function automatic int page_words(input int tp, input int d, input int g);
    return exp_words(tp, d, g) + tp * d / 8 + tp * d / 16;
  endfunction

  // ---- categories -----------------------------------------------------------
  typedef enum logic [1:0] {CAT_API = 2'd0, CAT_TEXT = 2'd1, CAT_CODE = 2'd2, CAT_THINK = 2'd3} cat_e;

  // ---- per compute-layer block metadata (well under the 32 B budget) -------
  typedef struct packed {
    logic        valid;      // slot holds a block
    logic        pending;    // demotion queued or running
    logic        replicated; // replica already requested
    logic [9:0]  block;      // logical block id
    cat_e        cat;        // category w
    logic [31:0] t_last;     // last-access timestamp
    logic [15:0] offset;     // prompt-position offset (tokens)
    logic [15:0] n_remote;   // remote-hit count
    logic [7:0]  cards;      // cards that have hit the block (n_cards = popcount)
  } meta_t;

  // ---- migration jobs --------------------------------------------------------
  typedef enum logic {DMA_DEMOTE = 1'b0, DMA_PROMOTE = 1'b1} dma_op_e;
  typedef struct packed {
    dma_op_e     op;
    logic [9:0]  block;
    logic [15:0] slot;
    cat_e        cat;
    logic [15:0] offset;
  } dma_job_t;

  // ---- capacity-layer request (one 64-bit word) -------------------------------
  typedef struct packed {
    logic              we;
    logic [4:0]        bank;
    logic [CAP_AW-1:0] addr;
    logic [63:0]       wdata;
  } cap_req_t;

  // ---- host link (logical channel carried by the D2D link) -------------------
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_CFG      = 4'd1,   // write a configuration register or table entry
    OP_KV_WRITE = 4'd2,   // write one FP16 K or V element of context token n
    OP_ALLOC    = 4'd3,   // declare a block resident in a compute slot
    OP_TOUCH    = 4'd4,   // record an access to a block, return its location
    OP_PROMOTE  = 4'd5,   // bring a block into a compute slot (foreground)
    OP_DEMOTE   = 4'd6,   // move a block to the capacity layers (background)
    OP_Q_WRITE  = 4'd7,   // broadcast one element of q
    OP_SCORE    = 4'd8,   // s = qK^T over the first len tokens
    OP_CONTEXT  = 4'd9,   // o = aV, followed by len OP_A_DATA commands
    OP_A_DATA   = 4'd10,  // one element of a
    OP_GPU_RD   = 4'd11,  // plain read of a capacity-layer word
    OP_GPU_WR   = 4'd12   // plain write of a capacity-layer word
  } host_op_e;

  typedef struct packed {
    host_op_e    op;
    logic [9:0]  block;
    logic [15:0] slot;     // compute slot; token index n for KV_WRITE; cfg selector
    logic [15:0] idx;      // dimension j, q index, len, cfg index
    logic        is_v;     // KV_WRITE: Value (1) or Key (0); TOUCH: remote hit
    cat_e        cat;
    logic [15:0] offset;   // ALLOC/PROMOTE offset
    logic [2:0]  card;     // TOUCH: requesting card
    logic [63:0] data;     // element / cfg value / GPU write data
    logic [4:0]  bank;     // GPU_RD/WR capacity bank
    logic [CAP_AW-1:0] addr;
  } host_cmd_t;

  typedef enum logic [2:0] {
    RSP_SCORE = 3'd0, RSP_OUT = 3'd1, RSP_GPU = 3'd2, RSP_TOUCH = 3'd3,
    RSP_DONE  = 3'd4, RSP_REPL = 3'd5
  } rsp_kind_e;

  typedef struct packed {
    rsp_kind_e   kind;
    logic [15:0] idx;    // score/output index, slot, block
    logic [63:0] data;
  } host_rsp_t;

  // ---- configuration selectors (OP_CFG, in host_cmd_t.slot) -------------------
  localparam logic [15:0] CFG_F_TABLE  = 16'd0;  // idx = {cat, bin}, data = F_w(bin) in Q0.16
  localparam logic [15:0] CFG_LIFESPAN = 16'd1;  // idx = cat, data = l_w
  localparam logic [15:0] CFG_WATER    = 16'd2;  // data = {theta_hi[15:0], theta_lo[15:0]}
  localparam logic [15:0] CFG_REPLICA  = 16'd3;  // data = {tau_off[15:0], tau_cards[15:0], tau_hits[15:0]}

  // ---- layout --------------------------------------------------------------
  // Key of token n: bank n mod B, row n div B, column j.
  // Value of dimension j, token n: bank j mod B, column j div B, row n.
  function automatic int k_bank(input int n, input int b); return n % b; endfunction
  function automatic int k_row (input int n, input int b); return n / b; endfunction
  function automatic int v_bank(input int j, input int b); return j % b; endfunction
  function automatic int v_col (input int j, input int b); return j / b; endfunction
  function automatic int cap_bank(input int p, input int bc); return p % bc; endfunction

  function automatic int popcount8(input logic [7:0] v);
    int c;
    c = 0;
    for (int i = 0; i < 8; i++) c += int'(v[i]);
    return c;
  endfunction

endpackage
