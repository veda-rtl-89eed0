// normalization_unit: the normalization half of the special function unit.
//
// It sits on the serial input of the outer-product PE array: each element
// arriving from the on-chip buffer is normalized and immediately broadcast to
// the array, so normalization costs no extra pass.
//   SFU_SOFTMAX:   y = exp(x - stat0) / stat1   (stat0 = max, stat1 = exp_sum)
//   SFU_LAYERNORM: y = (x - stat0) / stat1      (stat0 = mean, stat1 = sigma)
//   SFU_NONE:      y = x                        (plain GEMV input)
// Timing: a three-stage pipeline (subtract, exponential, divide), one element
// per cycle; out_valid/y follow in_valid/x by LAT = 3 cycles in every mode.
// mode, stat0 and stat1 must be stable while elements flow.  The operations
// follow the paper's element-serial scheme; the stage split is this design's own.
module normalization_unit
  import fp16_pkg::*;
  import veda_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  sfu_mode_e mode,
  input  fp16_t     stat0,
  input  fp16_t     stat1,
  input  logic      in_valid,
  input  fp16_t     x,
  output logic      out_valid,
  output fp16_t     y
);
  logic  v1, v2;
  fp16_t d1, e2, x1, x2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      d1 <= FP_ZERO; e2 <= FP_ZERO; x1 <= FP_ZERO; x2 <= FP_ZERO; y <= FP_ZERO;
    end else begin
      // stage 1: subtract
      v1 <= in_valid;
      x1 <= x;
      d1 <= fp_sub(x, stat0);
      // stage 2: exponential (softmax only)
      v2 <= v1;
      x2 <= x1;
      e2 <= (mode == SFU_SOFTMAX) ? fp_exp(d1) : d1;
      // stage 3: divide
      out_valid <= v2;
      y <= (mode == SFU_NONE) ? x2 : fp_div(e2, stat1);
    end
  end
endmodule
