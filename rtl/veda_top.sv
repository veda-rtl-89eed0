// veda_top: the VEDA LLM-generation accelerator.
//
// Blocks: a 128-PE runtime-reconfigurable GEMV array (pe_array), the special
// function unit split into a reduction unit on the array's serial output and a
// normalization unit on its serial input, the voting engine for KV-cache
// eviction, the 256 KB on-chip buffer and the scheduler.  The off-chip HBM is
// outside; its row port is brought out.
// Data paths:
//   * PE-array weights come from the HBM read port (generation phase: weights
//     and the KV cache stream straight in) or from buffer port B (weights
//     reused from the buffer);
//   * inner-product x comes from buffer port A as a whole row; outer-product x
//     is the normalization unit's output, broadcast to all 128 lanes;
//   * inner-product results are written lane by lane into the buffer (scores
//     after the softmax scaling) and go to the reduction unit; outer-product accumulators are written as a row;
//   * the normalized softmax scores also go to the voting engine, whose
//     eviction index is an output (the host uses it as the slot of the next
//     kv vector, and clears that slot's votes with a STORE command).
// HBM interface: one 128 x FP16 row (256 B) per cycle in each direction, which
// at 1 GHz is the 256 GB/s of the paper's HBM.  Read data must arrive exactly
// HBM_LAT cycles after hbm_re.  Commands are described in scheduler.sv.
module veda_top
  import fp16_pkg::*;
  import veda_pkg::*;
#(
  parameter int unsigned HBM_LAT  = 2,
  parameter int unsigned MAX_LEN  = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // commands
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        cmd_done,
  // HBM row port
  output logic        hbm_re,
  output logic [23:0] hbm_raddr,
  input  row_t        hbm_rdata,
  output logic        hbm_we,
  output logic [23:0] hbm_waddr,
  output row_t        hbm_wdata,
  // KV-cache eviction
  output logic        evict_valid,
  output logic [11:0] evict_idx,
  output logic        vote_busy
);
  ctl_t  ctl;
  cmd_t  cur;
  row_t  ra_data, rb_data, arr_x, arr_w, arr_acc, wdata;
  logic [LANES-1:0] wmask;
  logic  s_valid, red_ready, red_done, norm_ov;
  fp16_t s, s_st, stat0, stat1, norm_y, norm_x, vote_thr;

  scheduler #(.HBM_LAT(HBM_LAT)) u_sched (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .red_ready(red_ready), .red_done(red_done), .s_valid(s_valid), .vote_busy(vote_busy),
    .ctl(ctl), .cur(cur), .done(cmd_done)
  );

  // ---------------- PE array ----------------
  always_comb begin
    arr_w = ctl.w_from_buf ? rb_data : hbm_rdata;
    for (int i = 0; i < int'(LANES); i++) arr_x[i] = ctl.arr_ld_bcast ? norm_y : ra_data[i];
  end

  pe_array u_array (
    .clk(clk), .rst_n(rst_n), .inner(ctl.arr_inner),
    .ld_x(ctl.arr_ld_x || ctl.arr_ld_bcast), .x(arr_x),
    .ld_w(ctl.arr_ld_w || ctl.arr_ld_bcast), .w(arr_w),
    .acc_clr(ctl.arr_acc_clr),
    .s_valid(s_valid), .s(s), .acc(arr_acc)
  );

  // ---------------- special function unit ----------------
  reduction_unit u_red (
    .clk(clk), .rst_n(rst_n), .start(ctl.red_start), .mode(ctl.red_mode), .scale(cur.scale),
    .in_valid(ctl.red_valid), .in_last(ctl.red_last), .x(s), .in_ready(red_ready),
    .done(red_done), .stat0(stat0), .stat1(stat1), .x_scaled(s_st)
  );

  assign norm_x = ra_data[ctl.norm_lane];

  normalization_unit u_norm (
    .clk(clk), .rst_n(rst_n), .mode(ctl.norm_mode), .stat0(stat0), .stat1(stat1),
    .in_valid(ctl.norm_valid), .x(norm_x), .out_valid(norm_ov), .y(norm_y)
  );

  // ---------------- voting engine ----------------
  voting_engine #(.MAX_LEN(MAX_LEN)) u_vote (
    .clk(clk), .rst_n(rst_n), .start(ctl.vote_start),
    .len(($clog2(MAX_LEN)+1)'(cur.len)), .token_idx(($clog2(MAX_LEN)+1)'(cur.token_idx)),
    .gen_phase(cur.gen_phase), .last_head(cur.last_head),
    .in_valid(norm_ov && ctl.vote_feed), .s(norm_y),
    .clr_valid(ctl.vote_clr), .clr_idx(($clog2(MAX_LEN))'(ctl.vote_clr_idx)),
    .busy(vote_busy), .evict_valid(evict_valid), .evict_idx(evict_idx), .threshold(vote_thr)
  );

  // ---------------- on-chip buffer ----------------
  always_comb begin
    wmask = '1;
    wdata = arr_acc;
    unique case (ctl.buf_wsel)
      WSEL_ELEM: begin
        wmask = '0;
        wmask[ctl.buf_wlane] = 1'b1;
        for (int i = 0; i < int'(LANES); i++) wdata[i] = ctl.red_valid ? s_st : s;
      end
      WSEL_HBM: wdata = hbm_rdata;
      default:  wdata = arr_acc;
    endcase
  end

  on_chip_buffer #(.LANES(LANES), .DEPTH(BUF_ROWS)) u_buf (
    .clk(clk), .we(ctl.buf_we), .waddr(ctl.buf_waddr), .wmask(wmask), .wdata(wdata),
    .ra_en(ctl.buf_ra_en), .ra_addr(ctl.buf_ra_addr), .ra_data(ra_data),
    .rb_en(ctl.buf_rb_en), .rb_addr(ctl.buf_rb_addr), .rb_data(rb_data)
  );

  // ---------------- HBM ----------------
  assign hbm_re    = ctl.hbm_re;
  assign hbm_raddr = ctl.hbm_raddr;
  assign hbm_we    = ctl.hbm_we;
  assign hbm_waddr = ctl.hbm_waddr;
  assign hbm_wdata = rb_data;

  logic unused;
  assign unused = ^{vote_thr, cur};
endmodule
