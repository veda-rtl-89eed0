// tb_on_chip_buffer: random full-row and single-lane writes against a
// reference copy, read back on both ports with the one-cycle read latency,
// including a read of a row being written in the same cycle (old data).
module tb_on_chip_buffer;
  localparam int LANES = 128, DEPTH = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, ra_en, rb_en;
  logic [9:0] waddr, ra_addr, rb_addr;
  logic [LANES-1:0] wmask;
  logic [LANES-1:0][15:0] wdata, ra_data, rb_data;
  logic [LANES-1:0][15:0] ref_mem [DEPTH];

  on_chip_buffer dut (.clk, .we, .waddr, .wmask, .wdata, .ra_en, .ra_addr, .ra_data,
    .rb_en, .rb_addr, .rb_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LANES-1:0][15:0] exp_a, exp_b;
    we = 0; ra_en = 0; rb_en = 0; waddr = 0; ra_addr = 0; rb_addr = 0; wmask = 0; wdata = 0;
    // initialise 64 rows through the write port
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      we = 1; waddr = 10'(r * 16); wmask = '1;
      for (int i = 0; i < LANES; i++) wdata[i] = 16'($urandom);
      ref_mem[r * 16] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      // random single-lane or full-row write
      we = ($urandom % 2 == 0);
      waddr = 10'(($urandom % 64) * 16);
      if ($urandom % 3 == 0) wmask = '1;
      else begin
        wmask = '0;
        wmask[$urandom % LANES] = 1'b1;
      end
      for (int i = 0; i < LANES; i++) wdata[i] = 16'($urandom);
      ra_en = 1; ra_addr = (k % 7 == 0) ? waddr : 10'(($urandom % 64) * 16);
      rb_en = 1; rb_addr = 10'(($urandom % 64) * 16);
      exp_a = ref_mem[ra_addr];
      exp_b = ref_mem[rb_addr];
      if (we) for (int i = 0; i < LANES; i++) if (wmask[i]) ref_mem[waddr][i] = wdata[i];
      @(negedge clk);
      we = 0; ra_en = 0; rb_en = 0;
      checks += 2;
      if (ra_data != exp_a) begin
        failures++;
        $display("FAIL port A row %0d", ra_addr);
      end
      if (rb_data != exp_b) begin
        failures++;
        $display("FAIL port B row %0d", rb_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
