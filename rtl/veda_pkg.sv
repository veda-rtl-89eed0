// veda_pkg: types and constants shared by the accelerator's blocks.
//
// It holds the 2-bit PE control code, the special-function-unit modes, the
// command format accepted by the scheduler and the per-cycle control bundle the
// scheduler drives.  The PE code has the four behaviours the PE is described
// with (disable, clear, local accumulation, partial-sum transmission); the
// numeric encodings and the command set are this design's own.
package veda_pkg;
  import fp16_pkg::*;

  localparam int unsigned LANES    = 128;   // 8 x 8 x 2 PEs, one head dimension
  localparam int unsigned BUF_ROWS = 1024;  // 256 KB / (128 lanes * 2 B)

  typedef logic [LANES-1:0][15:0] row_t;

  typedef enum logic [1:0] {
    PE_DISABLE  = 2'b00,  // hold every register
    PE_CLEAR    = 2'b01,  // clear the accumulator
    PE_LOCAL    = 2'b10,  // acc <= acc + x*w
    PE_TRANSMIT = 2'b11   // acc <= transmitted partial sum(s) (+ x*w on type A)
  } pe_mode_e;

  typedef enum logic [1:0] {
    SFU_NONE      = 2'd0,
    SFU_SOFTMAX   = 2'd1,
    SFU_LAYERNORM = 2'd2
  } sfu_mode_e;

  typedef enum logic [2:0] {
    OP_ATTN       = 3'd0,  // one attention head: q*K^T, softmax, s'*V, voting
    OP_GEMV_INNER = 3'd1,  // y[j] = x . W[j], x is one buffer row, W rows streamed
    OP_GEMV_OUTER = 3'd2,  // y = sum_t x[t] * W[t], x elements streamed
    OP_LOAD       = 3'd3,  // HBM rows -> buffer rows
    OP_STORE      = 3'd4   // buffer rows -> HBM rows
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [12:0] len;        // l (ATTN), n (GEMV_INNER), k (GEMV_OUTER) or row count
    logic [23:0] hbm_a;      // K base (ATTN), weight base (GEMV) or first HBM row (LOAD/STORE)
    logic [23:0] hbm_b;      // V base (ATTN)
    logic [9:0]  buf_x;      // q / x row (first row for element-serial input)
    logic [9:0]  buf_y;      // output row (first row for element-serial output)
    logic [9:0]  buf_s;      // score scratch rows (ATTN) or weight rows (w_from_buf)
    logic        w_from_buf; // GEMV weights read from the on-chip buffer
    sfu_mode_e   sfu;        // GEMV_INNER: reduction mode; GEMV_OUTER: normalization mode
    fp16_t       scale;      // softmax score scale (1/sqrt(d))
    logic [12:0] token_idx;  // voting: index i of the current token
    logic        gen_phase;  // voting: generation phase (eviction on)
    logic        last_head;  // voting: last head of the layer
    logic        vote_clr;   // STORE: clear the vote count of `slot`
    logic [11:0] slot;       // STORE: KV slot that the stored vector occupies
  } cmd_t;

  typedef enum logic [1:0] {
    WSEL_ELEM = 2'd0,  // one serial inner-product result into one lane
    WSEL_ACC  = 2'd1,  // the outer-product accumulators as a row
    WSEL_HBM  = 2'd2   // an HBM row (LOAD)
  } wsel_e;

  // per-cycle controls driven by the scheduler
  typedef struct packed {
    logic        arr_inner;     // PE array configuration
    logic        arr_ld_x;      // load x registers from buffer port A (inner)
    logic        arr_ld_w;      // inner: load weights (issue one dot product)
    logic        arr_ld_bcast;  // outer: load broadcast normalized element and weights
    logic        w_from_buf;    // weights from buffer port B instead of HBM
    logic        arr_acc_clr;
    logic        hbm_re;
    logic [23:0] hbm_raddr;
    logic        hbm_we;
    logic [23:0] hbm_waddr;
    logic        buf_ra_en;
    logic [9:0]  buf_ra_addr;
    logic        buf_rb_en;
    logic [9:0]  buf_rb_addr;
    logic        buf_we;
    wsel_e       buf_wsel;
    logic [9:0]  buf_waddr;
    logic [6:0]  buf_wlane;
    logic        red_start;
    sfu_mode_e   red_mode;
    logic        red_valid;
    logic        red_last;
    logic        norm_valid;
    logic [6:0]  norm_lane;
    sfu_mode_e   norm_mode;
    logic        vote_start;
    logic        vote_feed;     // normalized elements also go to the voting engine
    logic        vote_clr;
    logic [11:0] vote_clr_idx;
  } ctl_t;
endpackage
