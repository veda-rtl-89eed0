// on_chip_buffer: the 256 KB on-chip SRAM of the accelerator.
//
// Organised as DEPTH rows of LANES FP16 words, so one row matches one PE-array
// operand (128 lanes x 16 bit = 256 B; 1024 rows = 256 KB).  It holds input
// and output activations, the attention score scratch rows and weights that are
// reused across tokens in the prefilling phase.
// Ports: one write port with a per-lane enable mask (a single element of a
// serial result can be written), and two synchronous read ports A and B whose
// data appear one cycle after the enable.  A read of a row written in the same
// cycle returns the old contents.  Written as a plain array (a compiler would
// map it onto SRAM macros); the row width and the two read ports are this
// design's own choices, the capacity is the paper's.
module on_chip_buffer #(
  parameter int unsigned LANES = 128,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(DEPTH)-1:0]     waddr,
  input  logic [LANES-1:0]             wmask,
  input  logic [LANES-1:0][15:0]       wdata,
  input  logic                         ra_en,
  input  logic [$clog2(DEPTH)-1:0]     ra_addr,
  output logic [LANES-1:0][15:0]       ra_data,
  input  logic                         rb_en,
  input  logic [$clog2(DEPTH)-1:0]     rb_addr,
  output logic [LANES-1:0][15:0]       rb_data
);
  logic [LANES-1:0][15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < int'(LANES); i++) if (wmask[i]) mem[waddr][i] <= wdata[i];
    end
    if (ra_en) ra_data <= mem[ra_addr];
    if (rb_en) rb_data <= mem[rb_addr];
  end
endmodule
