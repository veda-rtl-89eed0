// pe_subarray: an N x N block of reconfigurable PEs with the hierarchical
// adder tree built from the PEs' own adders.
//
// Outer-product configuration (inner = 0): every PE multiplies its input by its
// own weight and accumulates locally (acc_en), or clears (acc_clr), or holds.
// Inner-product configuration (inner = 1): every PE is in transmit mode and the
// adders form a pipelined two-level tree.  Inside a row (positions 1..N),
// odd positions are type A and add their own product to the product of the
// next PE; an even position p < N at tree level L (p = 2^L * odd) is type B and
// adds the accumulators of positions p - 2^(L-1) and p + 2^(L-1).  For N = 8:
// 1,3,5,7 -> 2,6 -> 4, and the row sum sits in PE 4.  The N-th PE of each row
// is not used by that tree; those PEs form the L2 tree across rows with the same
// pattern (rows 1,3,5,7 add the row sums of rows r and r+1, then rows 2,6, then
// row 4), so the block sum sits in PE N of row N/2 (tree_out).  The last PE of
// the last row is left over; it adds tree_out and ext_b (comb_out) and is used
// by the parent array to join two sub-arrays.
// Timing in the inner configuration: a weight loaded at one clock edge reaches
// tree_out 2*log2(N) edges later and comb_out one edge after that, one new
// result per cycle.  The tree pattern follows the paper's figure for N = 8; which
// row holds the L2 root and the use of the spare PE are this design's choices.
module pe_subarray
  import fp16_pkg::*;
  import veda_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inner,
  input  logic                   ld_x,
  input  logic                   ld_w,
  input  logic                   acc_en,
  input  logic                   acc_clr,
  input  logic                   comb_en,
  input  logic [N*N-1:0][15:0]   x,
  input  logic [N*N-1:0][15:0]   w,
  input  fp16_t                  ext_b,
  output fp16_t                  tree_out,
  output fp16_t                  comb_out,
  output logic [N*N-1:0][15:0]   acc
);
  localparam int unsigned ROOT = N / 2;  // 1-based position of a tree root

  logic [N*N-1:0][15:0] prod;

  // trailing-zero count of a 1-based tree position = its tree level
  function automatic int unsigned level(int unsigned p);
    int unsigned l;
    l = 0;
    while (p % 2 == 0 && p > 1) begin
      p = p / 2;
      l++;
    end
    return l;
  endfunction

  // 0-based linear index of (row, column), both 1-based
  function automatic int unsigned idx(int unsigned r, int unsigned c);
    return (r - 1) * N + (c - 1);
  endfunction

  pe_mode_e outer_mode;
  assign outer_mode = acc_clr ? PE_CLEAR : (acc_en ? PE_LOCAL : PE_DISABLE);

  for (genvar r = 1; r <= N; r++) begin : g_row
    for (genvar c = 1; c <= N; c++) begin : g_col
      localparam int unsigned LV   = level(c);
      localparam int unsigned LVR  = level(r);
      localparam bit          TB   = (c % 2 == 0);
      fp16_t    pa, pb;
      pe_mode_e mode;

      if (c < N && c % 2 == 1) begin : g_l1_leaf
        assign pa = prod[idx(r, c + 1)];
        assign pb = FP_ZERO;
      end else if (c < N) begin : g_l1_node
        assign pa = acc[idx(r, c - (1 << (LV - 1)))];
        assign pb = acc[idx(r, c + (1 << (LV - 1)))];
      end else if (r < N && r % 2 == 1) begin : g_l2_leaf
        assign pa = acc[idx(r, ROOT)];
        assign pb = acc[idx(r + 1, ROOT)];
      end else if (r < N) begin : g_l2_node
        assign pa = acc[idx(r - (1 << (LVR - 1)), N)];
        assign pb = acc[idx(r + (1 << (LVR - 1)), N)];
      end else begin : g_spare
        assign pa = acc[idx(ROOT, N)];
        assign pb = ext_b;
      end

      if (r == N && c == N) begin : g_mode_spare
        assign mode = inner ? (comb_en ? PE_TRANSMIT : PE_DISABLE) : outer_mode;
      end else begin : g_mode
        assign mode = inner ? PE_TRANSMIT : outer_mode;
      end

      reconfig_pe #(.TYPE_B(TB)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .mode   (mode),
        .ld_x   (ld_x),
        .ld_w   (ld_w),
        .x      (x[idx(r, c)]),
        .w      (w[idx(r, c)]),
        .psum_a (pa),
        .psum_b (pb),
        .prod   (prod[idx(r, c)]),
        .acc    (acc[idx(r, c)])
      );
    end
  end

  assign tree_out = acc[idx(ROOT, N)];
  assign comb_out = acc[idx(N, N)];
endmodule
