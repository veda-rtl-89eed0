// scheduler: system control and PE-array configuration.
//
// It executes one command at a time (cmd_valid/cmd_ready handshake, `done`
// pulses when it has finished) and drives every control of the datapath
// through the ctl bundle.  Commands (veda_pkg::op_e):
//   OP_GEMV_INNER  y[j] = x . W[j] for j < len: x is one buffer row loaded into
//                  the PE input registers, one weight row per cycle (HBM or
//                  buffer), results appear serially and are written lane by lane
//                  from row buf_y on.  With sfu = SFU_LAYERNORM the results also
//                  feed the reduction unit (element-serial reduction).
//   OP_GEMV_OUTER  y = sum_t x[t] * W[t] for t < len: x elements are read from
//                  the buffer (row buf_x + t/128, lane t%128), pass the
//                  normalization unit (sfu mode) and are broadcast to the array
//                  together with weight row t; the accumulators are written to
//                  row buf_y.
//   OP_ATTN        one attention head: q*K^T as an inner-product GEMV over the
//                  len K rows (scores to rows buf_s.., softmax reduction with
//                  back-pressure from the reduction unit), then s'*V as an
//                  outer-product GEMV with softmax normalization on the serial
//                  input, the normalized scores also going to the voting engine.
//   OP_LOAD        len HBM rows from hbm_a on -> buffer rows from buf_y on.
//   OP_STORE       len buffer rows from buf_x on -> HBM rows from hbm_a on;
//                  with vote_clr the vote count of `slot` is cleared (after
//                  the voting engine has finished the current head).
// Timing contract (fixed latencies): HBM read data HBM_LAT cycles after
// hbm_re; buffer read data 1 cycle after the enable; normalization NORM_LAT
// cycles.  Delay lines line the controls up with these latencies, so an
// outer-product step (element and weight row) is issued every cycle.
// The command set, encodings and latencies are this design's own; the paper
// names the block (system control and PE-array configuration) and the
// element-serial schedule it implements.
module scheduler
  import fp16_pkg::*;
  import veda_pkg::*;
#(
  parameter int unsigned HBM_LAT  = 2,
  parameter int unsigned NORM_LAT = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cmd_valid,
  output logic cmd_ready,
  input  cmd_t cmd,
  input  logic red_ready,
  input  logic red_done,
  input  logic s_valid,
  input  logic vote_busy,
  output ctl_t ctl,
  output cmd_t cur,
  output logic done
);
  localparam int unsigned X_LAT = 1 + NORM_LAT;  // buffer read + normalization

  typedef enum logic [3:0] {
    S_IDLE, S_INNER_LDX, S_INNER_RUN, S_INNER_WAIT, S_VWAIT, S_OUTER_CLR,
    S_OUTER_RUN, S_OUTER_WAIT, S_OUTER_WB, S_LOAD, S_CLR_WAIT, S_STORE, S_DRAIN
  } state_e;

  state_e      state;
  cmd_t        c;
  logic [12:0] iss, out_cnt;
  logic        red_fin, first;
  logic [3:0]  wait_cnt;
  logic        is_attn, use_red;

  assign is_attn = (c.op == OP_ATTN);
  assign use_red = is_attn || (c.op == OP_GEMV_INNER && c.sfu != SFU_NONE);
  assign cmd_ready = (state == S_IDLE);
  assign cur       = c;

  // ---------------- issue conditions ----------------
  logic iss_inner, iss_outer, iss_load, iss_store;
  assign iss_inner = (state == S_INNER_RUN) && iss < c.len && (!use_red || red_ready);
  assign iss_outer = (state == S_OUTER_RUN) && iss < c.len;
  assign iss_load  = (state == S_LOAD) && iss < c.len;
  assign iss_store = (state == S_STORE) && iss < c.len;

  logic [23:0] w_base_inner, w_base_outer;
  assign w_base_inner = c.hbm_a;
  assign w_base_outer = is_attn ? c.hbm_b : c.hbm_a;

  // ---------------- delay lines ----------------
  logic        ldw_q;
  logic        rbi_v;
  logic [9:0]  rbi_a;
  logic        nrm_v;
  logic [6:0]  nrm_l;
  logic        bc_v;
  logic        wo_v;
  logic [23:0] wo_a;
  logic        wob_v;
  logic [9:0]  wob_a;
  logic        ld_v;
  logic [9:0]  ld_a;
  logic        st_v;
  logic [23:0] st_a;

  delay_line #(.W(1), .D(HBM_LAT)) u_dl_ldw (
    .clk(clk), .rst_n(rst_n), .d(iss_inner), .q(ldw_q));
  delay_line #(.W(11), .D(HBM_LAT - 1)) u_dl_rbi (
    .clk(clk), .rst_n(rst_n), .d({iss_inner && c.w_from_buf, c.buf_s + iss[9:0]}), .q({rbi_v, rbi_a}));
  delay_line #(.W(8), .D(1)) u_dl_nrm (
    .clk(clk), .rst_n(rst_n), .d({iss_outer, iss[6:0]}), .q({nrm_v, nrm_l}));
  delay_line #(.W(1), .D(X_LAT)) u_dl_bc (
    .clk(clk), .rst_n(rst_n), .d(iss_outer), .q(bc_v));
  delay_line #(.W(25), .D(X_LAT - HBM_LAT)) u_dl_wo (
    .clk(clk), .rst_n(rst_n), .d({iss_outer && !c.w_from_buf, w_base_outer + 24'(iss)}), .q({wo_v, wo_a}));
  delay_line #(.W(11), .D(X_LAT - 1)) u_dl_wob (
    .clk(clk), .rst_n(rst_n), .d({iss_outer && c.w_from_buf, c.buf_s + iss[9:0]}), .q({wob_v, wob_a}));
  delay_line #(.W(11), .D(HBM_LAT)) u_dl_ld (
    .clk(clk), .rst_n(rst_n), .d({iss_load, c.buf_y + iss[9:0]}), .q({ld_v, ld_a}));
  delay_line #(.W(25), .D(1)) u_dl_st (
    .clk(clk), .rst_n(rst_n), .d({iss_store, c.hbm_a + 24'(iss)}), .q({st_v, st_a}));

  // ---------------- controls ----------------
  always_comb begin
    ctl = '0;
    ctl.arr_inner    = (state == S_INNER_LDX || state == S_INNER_RUN || state == S_INNER_WAIT);
    ctl.arr_ld_x     = (state == S_INNER_RUN) && first;
    ctl.arr_ld_w     = ldw_q;
    ctl.arr_ld_bcast = bc_v;
    ctl.w_from_buf   = c.w_from_buf;
    ctl.arr_acc_clr  = (state == S_OUTER_CLR);
    // HBM
    ctl.hbm_re    = (iss_inner && !c.w_from_buf) || wo_v || iss_load;
    ctl.hbm_raddr = iss_load ? c.hbm_a + 24'(iss) : (wo_v ? wo_a : w_base_inner + 24'(iss));
    ctl.hbm_we    = st_v;
    ctl.hbm_waddr = st_a;
    // buffer read port A: x row (inner) or element rows (outer)
    ctl.buf_ra_en   = (state == S_INNER_LDX) || iss_outer;
    ctl.buf_ra_addr = (state == S_INNER_LDX) ? c.buf_x
                    : (is_attn ? c.buf_s : c.buf_x) + 10'(iss[12:7]);
    // buffer read port B: weights or rows to store
    ctl.buf_rb_en   = rbi_v || wob_v || iss_store;
    ctl.buf_rb_addr = iss_store ? c.buf_x + iss[9:0] : (rbi_v ? rbi_a : wob_a);
    // buffer write
    if (s_valid) begin
      ctl.buf_we    = 1'b1;
      ctl.buf_wsel  = WSEL_ELEM;
      ctl.buf_waddr = (is_attn ? c.buf_s : c.buf_y) + 10'(out_cnt[12:7]);
      ctl.buf_wlane = out_cnt[6:0];
    end else if (state == S_OUTER_WB) begin
      ctl.buf_we    = 1'b1;
      ctl.buf_wsel  = WSEL_ACC;
      ctl.buf_waddr = c.buf_y;
    end else if (ld_v) begin
      ctl.buf_we    = 1'b1;
      ctl.buf_wsel  = WSEL_HBM;
      ctl.buf_waddr = ld_a;
    end
    // SFU
    ctl.red_start  = (state == S_INNER_LDX) && use_red;
    ctl.red_mode   = is_attn ? SFU_SOFTMAX : c.sfu;
    ctl.red_valid  = s_valid && use_red;
    ctl.red_last   = (out_cnt == c.len - 13'd1);
    ctl.norm_valid = nrm_v;
    ctl.norm_lane  = nrm_l;
    ctl.norm_mode  = is_attn ? SFU_SOFTMAX : c.sfu;
    // voting
    ctl.vote_start   = (state == S_VWAIT) && !vote_busy;
    ctl.vote_feed    = is_attn;
    ctl.vote_clr     = (state == S_STORE) && iss == '0 && c.vote_clr;
    ctl.vote_clr_idx = c.slot;
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      iss <= '0; out_cnt <= '0;
      red_fin <= 1'b0; first <= 1'b0; wait_cnt <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (s_valid) out_cnt <= out_cnt + 13'd1;
      if (red_done) red_fin <= 1'b1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd;
          iss <= '0; out_cnt <= '0; red_fin <= 1'b0;
          unique case (cmd.op)
            OP_ATTN, OP_GEMV_INNER: state <= S_INNER_LDX;
            OP_GEMV_OUTER:          state <= S_OUTER_CLR;
            OP_LOAD:                state <= S_LOAD;
            default:                state <= cmd.vote_clr ? S_CLR_WAIT : S_STORE;
          endcase
        end
        S_INNER_LDX: begin
          first <= 1'b1;
          state <= S_INNER_RUN;
        end
        S_INNER_RUN: begin
          first <= 1'b0;
          if (iss_inner) iss <= iss + 13'd1;
          if (iss_inner && iss == c.len - 13'd1) state <= S_INNER_WAIT;
        end
        S_INNER_WAIT: begin
          if (out_cnt == c.len && (!use_red || red_fin || red_done)) begin
            if (is_attn) state <= S_VWAIT;
            else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_VWAIT: if (!vote_busy) state <= S_OUTER_CLR;
        S_OUTER_CLR: begin
          iss   <= '0;
          state <= S_OUTER_RUN;
        end
        S_OUTER_RUN: begin
          iss <= iss + 13'd1;
          if (iss == c.len - 13'd1) begin
            wait_cnt <= 4'(X_LAT + 1);
            state    <= S_OUTER_WAIT;
          end
        end
        S_OUTER_WAIT: begin
          wait_cnt <= wait_cnt - 4'd1;
          if (wait_cnt == 4'd0) state <= S_OUTER_WB;
        end
        S_OUTER_WB: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        S_CLR_WAIT: if (!vote_busy) state <= S_STORE;
        S_LOAD, S_STORE: begin
          iss <= iss + 13'd1;
          if (iss == c.len - 13'd1) begin
            wait_cnt <= 4'(HBM_LAT);
            state    <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          wait_cnt <= wait_cnt - 4'd1;
          if (wait_cnt == 4'd0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_hbm_read: assert property (@(posedge clk) disable iff (!rst_n)
      !((iss_inner && !c.w_from_buf) && wo_v))
    else $error("two HBM reads in one cycle");
  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && cmd_valid) |-> cmd.len != '0)
    else $error("command with zero length");
endmodule
