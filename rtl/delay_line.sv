// delay_line: a W-bit shift register of D stages with reset (D = 0 is a wire).
// Used by the scheduler to line up control signals with the fixed latencies of
// the memories, the normalization pipeline and the PE array.
module delay_line #(
  parameter int unsigned W = 1,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [D-1:0][W-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else begin
        sr[0] <= d;
        for (int i = 1; i < int'(D); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[D-1];
  end
endmodule
