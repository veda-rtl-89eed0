// tb_pe_array: streams weight rows through the 128-lane array in the
// inner-product configuration (one dot product per cycle, checks values, order
// and the LAT_INNER = 8 cycle latency), then runs outer-product accumulation
// with a broadcast scalar and checks all 128 accumulators.
module tb_pe_array;
  import tb_util_pkg::*;
  import veda_pkg::*;

  localparam int L = 128;
  localparam int NROWS = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inner, ld_x, ld_w, acc_clr, s_valid;
  logic [L-1:0][15:0] x, w, acc;
  logic [15:0] s;

  pe_array dut (.clk, .rst_n, .inner, .ld_x, .x, .ld_w, .w, .acc_clr, .s_valid, .s, .acc);

  logic [15:0] xv [L];
  logic [15:0] wv [NROWS][L];
  real expd [NROWS];
  int  issue_cyc [NROWS];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // inner-product result monitor
  int got_n = 0;
  always @(negedge clk) if (rst_n && s_valid) begin
    checks++;
    if (got_n >= NROWS || !close(fp2r(s), expd[got_n], 0.02, 0.05)) begin
      failures++;
      $display("FAIL inner %0d: got %f expected %f", got_n, fp2r(s), expd[got_n]);
    end
    checks++;
    if (cyc - issue_cyc[got_n] != 8) begin
      failures++;
      $display("FAIL latency %0d: %0d cycles", got_n, cyc - issue_cyc[got_n]);
    end
    got_n++;
  end

  initial begin
    real ref_acc [L];
    real sc;
    inner = 1; ld_x = 0; ld_w = 0; acc_clr = 0; x = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- inner product ----------------
    for (int i = 0; i < L; i++) xv[i] = rnd_fp(-1.0, 1.0);
    for (int r = 0; r < NROWS; r++) begin
      expd[r] = 0.0;
      for (int i = 0; i < L; i++) begin
        wv[r][i] = rnd_fp(-1.0, 1.0);
        expd[r] += fp2r(xv[i]) * fp2r(wv[r][i]);
      end
    end
    @(negedge clk);
    for (int i = 0; i < L; i++) x[i] = xv[i];
    ld_x = 1;
    @(negedge clk);
    ld_x = 0;
    for (int r = 0; r < NROWS; r++) begin
      for (int i = 0; i < L; i++) w[i] = wv[r][i];
      ld_w = 1;
      issue_cyc[r] = cyc;
      // one bubble in the middle of the stream
      @(negedge clk);
      if (r == 10) begin
        ld_w = 0;
        @(negedge clk);
      end
    end
    ld_w = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (got_n != NROWS) begin
      failures++;
      $display("FAIL got %0d inner results", got_n);
    end
    // ---------------- outer product ----------------
    inner = 0;
    acc_clr = 1;
    @(negedge clk);
    acc_clr = 0;
    for (int i = 0; i < L; i++) ref_acc[i] = 0.0;
    for (int t = 0; t < 20; t++) begin
      logic [15:0] xs;
      xs = rnd_fp(-1.0, 1.0);
      sc = fp2r(xs);
      for (int i = 0; i < L; i++) begin
        x[i] = xs;
        w[i] = rnd_fp(-1.0, 1.0);
        ref_acc[i] += sc * fp2r(w[i]);
      end
      ld_x = 1; ld_w = 1;
      @(negedge clk);
    end
    ld_x = 0; ld_w = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      checks++;
      if (!close(fp2r(acc[i]), ref_acc[i], 0.02, 0.02)) begin
        failures++;
        $display("FAIL outer lane %0d: got %f expected %f", i, fp2r(acc[i]), ref_acc[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
