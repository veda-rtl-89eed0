// reduction_unit: the reduction half of the special function unit (SFU).
//
// It consumes the serial, element-by-element output of the inner-product PE
// array while the array is still running, so that softmax or layernorm
// statistics are ready a few cycles after the last element.
//   Softmax (mode SFU_SOFTMAX): each element is first multiplied by `scale`
//   (the 1/sqrt(d) score scaling).  Elements are written into a FIFO_DEPTH-entry
//   FIFO in tiles of TILE elements while the tile maximum is found.  When a tile
//   is complete the running maximum is updated; if it grew, exp_sum is first
//   rescaled by exp(old_max - new_max) (one cycle), then the tile's elements
//   leave the FIFO one per cycle and exp(x - max) is added to exp_sum (online
//   softmax).  Outputs: stat0 = max, stat1 = exp_sum.
//   Layernorm (mode SFU_LAYERNORM): the sum and the sum of squares are
//   accumulated per element; after the last element mean = sum/n,
//   var = sumsq/n - mean^2 and sigma = sqrt(var) take three cycles.  Outputs:
//   stat0 = mean, stat1 = sigma.
// Interface: `start` clears the unit and latches mode and scale.  Elements
// arrive with in_valid; in_last marks the final one.  in_ready is low while the
// FIFO has fewer than SKID free entries, so a pipelined producer can keep up to
// SKID elements in flight.  `done` pulses for one cycle when stat0/stat1 are
// valid; they then hold until the next start.  x_scaled is the incoming
// element after scaling (softmax) or unchanged (layernorm), for the caller to
// store so that normalization later sees the same values.
// One exponential unit is shared by the per-element exponentials and the
// rescale; two multipliers are shared between the scaling, the squares, the
// rescale and mean^2.  The tile size and the back-pressure rule are this
// design's own; the FIFO depth and the operations follow the paper.
module reduction_unit
  import fp16_pkg::*;
  import veda_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned TILE       = 8,
  parameter int unsigned SKID       = 12
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  sfu_mode_e mode,
  input  fp16_t     scale,
  input  logic      in_valid,
  input  logic      in_last,
  input  fp16_t     x,
  output logic      in_ready,
  output logic      done,
  output fp16_t     stat0,
  output fp16_t     stat1,
  output fp16_t     x_scaled
);
  localparam int unsigned AW = $clog2(FIFO_DEPTH);
  localparam int unsigned QD = FIFO_DEPTH / TILE;   // tile descriptors in flight

  typedef enum logic [2:0] {S_RUN, S_RESCALE, S_LN_MEAN, S_LN_MSQ, S_LN_SIGMA, S_DONE} state_e;

  state_e          state;
  sfu_mode_e       mode_r;
  fp16_t           scale_r;
  fp16_t           fifo [FIFO_DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic [AW:0]     count;
  fp16_t           tile_max, run_max, pend_max, exp_sum, sum, sumsq, msq;
  logic [$clog2(TILE+1)-1:0] tile_fill, drain_left;
  fp16_t           tq_max  [QD];
  logic [$clog2(TILE+1)-1:0] tq_size [QD];
  logic [$clog2(QD)-1:0] tq_wr, tq_rd;
  logic [$clog2(QD):0]   tq_cnt;
  logic            last_seen;
  logic [15:0]     n_elem;

  // shared operators
  fp16_t mul0_b, mul0_y, mul1_a, mul1_b, mul1_y, exp_in, exp_y, div_a, div_y, new_max;
  fp16_t xin, tile_max_nx;
  logic  push, tile_close, tq_pop, pop;

  assign in_ready = (count <= (AW+1)'(FIFO_DEPTH - SKID)) && state != S_DONE;
  assign push     = in_valid && mode_r == SFU_SOFTMAX;

  always_comb begin
    mul0_b = (mode_r == SFU_SOFTMAX) ? scale_r : x;
    mul0_y = fp_mul(x, mul0_b);
    xin    = mul0_y;
    x_scaled = (mode_r == SFU_SOFTMAX) ? mul0_y : x;
    tile_max_nx = (tile_fill == '0) ? xin : fp_max(tile_max, xin);
    tile_close  = push && (tile_fill == ($bits(tile_fill))'(TILE - 1) || in_last);

    new_max = fp_max(run_max, tq_max[tq_rd]);
    pop     = (state == S_RUN) && drain_left != '0;
    // the next tile's descriptor is taken while its predecessor's last element leaves
    tq_pop  = (state == S_RUN) && tq_cnt != '0 && (drain_left == '0 || (drain_left == 1 && pop));

    exp_in  = (state == S_RESCALE) ? fp_sub(run_max, pend_max) : fp_sub(fifo[rd_ptr], run_max);
    exp_y   = fp_exp(exp_in);

    mul1_a  = (state == S_RESCALE) ? exp_sum : sum;
    mul1_b  = (state == S_RESCALE) ? exp_y : sum;
    if (state == S_LN_SIGMA) begin
      mul1_a = stat0;
      mul1_b = stat0;
    end
    mul1_y  = fp_mul(mul1_a, mul1_b);

    div_a   = (state == S_LN_MEAN) ? sum : sumsq;
    div_y   = fp_div(div_a, fp_from_uint(n_elem));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_DONE;
      mode_r <= SFU_NONE;
      scale_r <= FP_ONE;
      wr_ptr <= '0; rd_ptr <= '0; count <= '0;
      tile_max <= FP_NEG_INF; run_max <= FP_NEG_INF; pend_max <= FP_NEG_INF; exp_sum <= FP_ZERO;
      sum <= FP_ZERO; sumsq <= FP_ZERO; msq <= FP_ZERO;
      tile_fill <= '0; drain_left <= '0;
      tq_wr <= '0; tq_rd <= '0; tq_cnt <= '0;
      last_seen <= 1'b0; n_elem <= '0;
      done <= 1'b0; stat0 <= FP_ZERO; stat1 <= FP_ZERO;
    end else if (start) begin
      state <= S_RUN;
      mode_r <= mode;
      scale_r <= scale;
      wr_ptr <= '0; rd_ptr <= '0; count <= '0;
      tile_max <= FP_NEG_INF; run_max <= FP_NEG_INF; pend_max <= FP_NEG_INF; exp_sum <= FP_ZERO;
      sum <= FP_ZERO; sumsq <= FP_ZERO; msq <= FP_ZERO;
      tile_fill <= '0; drain_left <= '0;
      tq_wr <= '0; tq_rd <= '0; tq_cnt <= '0;
      last_seen <= 1'b0; n_elem <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        n_elem <= n_elem + 16'd1;
        if (in_last) last_seen <= 1'b1;
      end
      // ---------------- softmax: fill side ----------------
      if (push) begin
        fifo[wr_ptr] <= xin;
        wr_ptr <= wr_ptr + 1'b1;
        tile_max <= tile_max_nx;
        if (tile_close) begin
          tq_max[tq_wr]  <= tile_max_nx;
          tq_size[tq_wr] <= tile_fill + 1'b1;
          tq_wr <= tq_wr + 1'b1;
          tile_fill <= '0;
        end else begin
          tile_fill <= tile_fill + 1'b1;
        end
      end
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      tq_cnt <= tq_cnt + ($bits(tq_cnt))'(push && tile_close) - ($bits(tq_cnt))'(tq_pop);
      // ---------------- layernorm: accumulate ----------------
      if (in_valid && mode_r == SFU_LAYERNORM) begin
        sum   <= fp_add(sum, x);
        sumsq <= fp_add(sumsq, mul0_y);
      end
      // ---------------- drain / finish ----------------
      unique case (state)
        S_RUN: begin
          if (pop) begin
            exp_sum <= fp_add(exp_sum, exp_y);
            rd_ptr <= rd_ptr + 1'b1;
            drain_left <= drain_left - 1'b1;
          end
          if (tq_pop) begin
            drain_left <= tq_size[tq_rd];
            tq_rd <= tq_rd + 1'b1;
            pend_max <= new_max;
            if (fp_lt(run_max, new_max) && (!fp_is_zero(exp_sum) || pop)) state <= S_RESCALE;
            else run_max <= new_max;
          end else if (!pop && last_seen && tq_cnt == '0 && !(in_valid)) begin
            if (mode_r == SFU_LAYERNORM) state <= S_LN_MEAN;
            else begin
              state <= S_DONE;
              done  <= 1'b1;
              stat0 <= run_max;
              stat1 <= exp_sum;
            end
          end
        end
        S_RESCALE: begin
          exp_sum <= mul1_y;
          run_max <= pend_max;
          state   <= S_RUN;
        end
        S_LN_MEAN: begin
          stat0 <= div_y;
          state <= S_LN_MSQ;
        end
        S_LN_MSQ: begin
          msq   <= div_y;
          state <= S_LN_SIGMA;
        end
        S_LN_SIGMA: begin
          stat1 <= fp_sqrt(fp_sub(msq, mul1_y));
          state <= S_DONE;
          done  <= 1'b1;
        end
        default: ;
      endcase
    end
  end
endmodule
