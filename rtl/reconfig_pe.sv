// reconfig_pe: one reconfigurable FP16 processing element of the PE array.
//
// The PE holds an input register (I-R), a weight register (W-R), one
// multiplier, one adder and an accumulator register (A-R).  A 2-bit mode
// selects what the adder does each cycle:
//   PE_LOCAL    acc <= acc + x*w                (outer-product accumulation)
//   PE_TRANSMIT acc <= psum_a + x*w             (type A: adder-tree leaf)
//               acc <= psum_a + psum_b          (type B: both operands from other PEs)
//   PE_CLEAR    acc <= 0
//   PE_DISABLE  acc holds
// The mux in front of the first adder operand picks the local accumulator or a
// transmitted partial sum; the second mux, present only when TYPE_B = 1, replaces
// the local product by a second transmitted partial sum.  The product of the two
// registers is also an output so that a neighbouring PE can add it.
// Timing: ld_x/ld_w load the registers at a clock edge; the product is available
// combinationally after that edge and is added into acc at the next edge.
// The PE structure and the 2-bit control follow the paper; the encoding of the
// four modes is this design's own.
module reconfig_pe
  import fp16_pkg::*;
  import veda_pkg::*;
#(
  parameter bit TYPE_B = 1'b0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  logic     ld_x,
  input  logic     ld_w,
  input  fp16_t    x,
  input  fp16_t    w,
  input  fp16_t    psum_a,
  input  fp16_t    psum_b,
  output fp16_t    prod,
  output fp16_t    acc
);
  fp16_t x_r, w_r, op_a, op_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_r <= FP_ZERO;
      w_r <= FP_ZERO;
    end else begin
      if (ld_x) x_r <= x;
      if (ld_w) w_r <= w;
    end
  end

  assign prod = fp_mul(x_r, w_r);

  always_comb begin
    op_a = (mode == PE_TRANSMIT) ? psum_a : acc;
    op_b = (TYPE_B && mode == PE_TRANSMIT) ? psum_b : prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= FP_ZERO;
    else begin
      unique case (mode)
        PE_CLEAR:                acc <= FP_ZERO;
        PE_LOCAL, PE_TRANSMIT:   acc <= fp_add(op_a, op_b);
        default:                 acc <= acc;
      endcase
    end
  end
endmodule
