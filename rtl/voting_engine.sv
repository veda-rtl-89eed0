// voting_engine: voting-based KV-cache eviction in hardware.
//
// Every token "votes" against the cached kv vectors it barely attends to.  For
// one head the engine:
//   1. COLLECT: stores the l softmax scores s' (the same stream that feeds the
//      s'V product) in a MAX_LEN x FP16 FIFO, accumulating sum(s'^2) and
//      noting the smallest score and its slot;
//   2. THRESH: mean = 1/l (softmax scores sum to one), sigma =
//      sqrt(sum(s'^2)/l - mean^2) and the threshold T = a*mean - b*sigma;
//   3. VOTE: replays the FIFO, one slot per cycle.  A score below T gives its
//      slot one vote; if T <= 0 only the (earliest) minimum score is voted.
//      The vote is added to the layer-wise vote count buffer (MAX_LEN x UINT16),
//      shared by all heads of the layer.  In the generation phase, on the last
//      head of the layer, each updated count is compared with the running
//      maximum (strictly greater, so the earliest slot wins ties) and the
//      12-bit eviction index register follows it.
// A token whose index is below RESERVED does not vote (reserved stage).
// Interface: start latches len, token_idx, gen_phase and last_head (engine
// must not be busy); scores arrive with in_valid, exactly len of them.
// evict_valid pulses when a new eviction index has been established; evict_idx
// holds it.  clr_valid zeroes one slot's count (a new kv vector took the slot)
// and is accepted only while the engine is idle.  After reset the count buffer
// is swept to zero (MAX_LEN cycles, busy high).
// Timing: l cycles to collect, 3 cycles for the threshold, l + 1 cycles to
// vote; the engine runs beside the PE array and adds no latency to it.
// The algorithm, sizes and a = 1, b = 0.2 follow the paper; the pipeline, the
// reset sweep and the clear port are this design's own.
module voting_engine
  import fp16_pkg::*;
#(
  parameter int unsigned MAX_LEN  = 4096,
  parameter int unsigned RESERVED = 32,
  parameter fp16_t       A_FP16   = 16'h3C00,  // a = 1.0
  parameter fp16_t       B_FP16   = 16'h3266   // b = 0.2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(MAX_LEN):0]   len,
  input  logic [$clog2(MAX_LEN):0]   token_idx,
  input  logic                       gen_phase,
  input  logic                       last_head,
  input  logic                       in_valid,
  input  fp16_t                      s,
  input  logic                       clr_valid,
  input  logic [$clog2(MAX_LEN)-1:0] clr_idx,
  output logic                       busy,
  output logic                       evict_valid,
  output logic [$clog2(MAX_LEN)-1:0] evict_idx,
  output fp16_t                      threshold
);
  localparam int unsigned AW = $clog2(MAX_LEN);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_COLLECT, S_TH_MEAN, S_TH_MSQ, S_TH_T, S_VOTE} state_e;

  state_e        state;
  fp16_t         sfifo  [MAX_LEN];
  logic [15:0]   counts [MAX_LEN];
  logic [AW:0]   len_r, in_cnt;
  logic          gen_r, last_r, vote_en;
  fp16_t         sumsq, min_s, mean, msq;
  logic [AW-1:0] min_idx;
  logic [AW:0]   rd_idx;
  logic          v1;
  logic [AW-1:0] k1;
  fp16_t         s1;
  logic [15:0]   c1, c_new, max_cnt;
  logic          vote;

  // count buffer port, shared by the reset sweep, the clear port and voting
  logic          cw_en;
  logic [AW-1:0] cw_addr;
  logic [15:0]   cw_data;

  assign busy = (state != S_IDLE);

  always_comb begin
    vote  = fp_lt(FP_ZERO, threshold) ? fp_lt(s1, threshold) : (k1 == min_idx);
    c_new = c1 + 16'(vote);
    cw_en = 1'b0;
    cw_addr = k1;
    cw_data = c_new;
    if (state == S_INIT) begin
      cw_en = 1'b1;
      cw_addr = rd_idx[AW-1:0];
      cw_data = '0;
    end else if (state == S_IDLE && clr_valid) begin
      cw_en = 1'b1;
      cw_addr = clr_idx;
      cw_data = '0;
    end else if (v1) begin
      cw_en = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_COLLECT && in_valid) sfifo[in_cnt[AW-1:0]] <= s;
    if (cw_en) counts[cw_addr] <= cw_data;
    s1 <= sfifo[rd_idx[AW-1:0]];
    c1 <= counts[rd_idx[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT;
      len_r <= '0; in_cnt <= '0; rd_idx <= '0;
      gen_r <= 1'b0; last_r <= 1'b0; vote_en <= 1'b0;
      sumsq <= FP_ZERO; min_s <= FP_POS_INF; min_idx <= '0;
      mean <= FP_ZERO; msq <= FP_ZERO; threshold <= FP_ZERO;
      v1 <= 1'b0; k1 <= '0; max_cnt <= '0;
      evict_valid <= 1'b0; evict_idx <= '0;
    end else begin
      evict_valid <= 1'b0;
      v1 <= 1'b0;
      unique case (state)
        S_INIT: begin
          rd_idx <= rd_idx + 1'b1;
          if (rd_idx == (AW+1)'(MAX_LEN - 1)) begin
            rd_idx <= '0;
            state  <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (start) begin
            len_r   <= len;
            gen_r   <= gen_phase;
            last_r  <= last_head;
            vote_en <= token_idx >= (AW+1)'(RESERVED);
            in_cnt  <= '0;
            sumsq   <= FP_ZERO;
            min_s   <= FP_POS_INF;
            min_idx <= '0;
            state   <= S_COLLECT;
          end
        end
        S_COLLECT: begin
          if (in_valid) begin
            sumsq <= fp_add(sumsq, fp_mul(s, s));
            if (fp_lt(s, min_s)) begin
              min_s   <= s;
              min_idx <= in_cnt[AW-1:0];
            end
            in_cnt <= in_cnt + 1'b1;
            if (in_cnt == len_r - 1'b1) state <= vote_en ? S_TH_MEAN : S_IDLE;
          end
        end
        S_TH_MEAN: begin
          mean  <= fp_div(FP_ONE, fp_from_uint(16'(len_r)));
          state <= S_TH_MSQ;
        end
        S_TH_MSQ: begin
          msq   <= fp_div(sumsq, fp_from_uint(16'(len_r)));
          state <= S_TH_T;
        end
        S_TH_T: begin
          threshold <= fp_sub(fp_mul(A_FP16, mean),
                              fp_mul(B_FP16, fp_sqrt(fp_sub(msq, fp_mul(mean, mean)))));
          rd_idx  <= '0;
          max_cnt <= '0;
          if (last_r && gen_r) evict_idx <= '0;
          state   <= S_VOTE;
        end
        S_VOTE: begin
          // stage 0: address rd_idx; stage 1 (v1): s1, c1 valid for slot k1
          if (rd_idx < len_r) begin
            v1     <= 1'b1;
            k1     <= rd_idx[AW-1:0];
            rd_idx <= rd_idx + 1'b1;
          end
          if (v1 && last_r && gen_r && c_new > max_cnt) begin
            max_cnt   <= c_new;
            evict_idx <= k1;
          end
          if (v1 && k1 == AW'(len_r - 1'b1)) begin
            state       <= S_IDLE;
            rd_idx      <= '0;
            evict_valid <= last_r && gen_r;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end


  a_clr_idle: assert property (@(posedge clk) disable iff (!rst_n) clr_valid |-> state == S_IDLE)
    else $error("vote count cleared while the engine is busy");
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("voting engine started while busy");

endmodule
