// pe_array: the runtime-reconfigurable GEMV engine, two N x N sub-arrays
// (2 x 8 x 8 = 128 PEs, one lane per element of a 128-wide head dimension).
//
// Lane numbering: lane = sub*N*N + (row-1)*N + (col-1).
// Outer-product configuration (inner = 0): the caller puts the same scalar on
// every lane of x (broadcast) and one weight row on w, with ld_x and ld_w.  One
// cycle later every PE adds x*w into its accumulator; acc holds the 128
// partial outputs.  acc_clr clears them.
// Inner-product configuration (inner = 0 -> 1): x (e.g. q) is loaded once with
// ld_x; each ld_w with a new weight row (e.g. one K row) issues one dot product
// of the 128 lanes.  Each sub-array reduces its 64 lanes in its L1/L2 tree and
// the spare PE of sub-array 0 adds the two sub-array sums.  s_valid/s give one
// result per cycle, LAT_INNER cycles after the ld_w cycle, in issue order.  With
// no ld_w the pipeline keeps flowing and s_valid stays low for those slots.
// The two-level tree follows the paper; joining the halves with the spare PE is
// this design's own choice.
module pe_array
  import fp16_pkg::*;
  import veda_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     inner,
  input  logic                     ld_x,
  input  logic [2*N*N-1:0][15:0]   x,
  input  logic                     ld_w,
  input  logic [2*N*N-1:0][15:0]   w,
  input  logic                     acc_clr,
  output logic                     s_valid,
  output fp16_t                    s,
  output logic [2*N*N-1:0][15:0]   acc
);
  localparam int unsigned LAT_INNER = 2 * $clog2(N) + 2;  // register stages from ld_w
  localparam int unsigned NN = N * N;

  logic                 acc_en;
  logic [LAT_INNER-1:0] vpipe;
  fp16_t                tree0, tree1, comb0, comb1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_en <= 1'b0;
      vpipe  <= '0;
    end else begin
      acc_en <= ld_w && !inner;
      vpipe  <= {vpipe[LAT_INNER-2:0], ld_w && inner};
    end
  end

  pe_subarray #(.N(N)) u_sub0 (
    .clk(clk), .rst_n(rst_n), .inner(inner), .ld_x(ld_x), .ld_w(ld_w),
    .acc_en(acc_en), .acc_clr(acc_clr), .comb_en(1'b1),
    .x(x[NN-1:0]), .w(w[NN-1:0]), .ext_b(tree1),
    .tree_out(tree0), .comb_out(comb0), .acc(acc[NN-1:0])
  );

  pe_subarray #(.N(N)) u_sub1 (
    .clk(clk), .rst_n(rst_n), .inner(inner), .ld_x(ld_x), .ld_w(ld_w),
    .acc_en(acc_en), .acc_clr(acc_clr), .comb_en(1'b0),
    .x(x[2*NN-1:NN]), .w(w[2*NN-1:NN]), .ext_b(FP_ZERO),
    .tree_out(tree1), .comb_out(comb1), .acc(acc[2*NN-1:NN])
  );

  assign s_valid = vpipe[LAT_INNER-1];
  assign s       = comb0;

  // sub-array 1 leaves its spare PE idle in the inner configuration
  logic unused;
  assign unused = ^{tree0, comb1};
endmodule
