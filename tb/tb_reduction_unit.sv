// tb_reduction_unit: softmax reduction (scaled max and online exp_sum) and
// layernorm reduction (mean, sigma) on element streams with random gaps,
// respecting in_ready.  Expected values are computed in double precision.
// Also checks that the statistics follow the last element within 2*TILE+4
// cycles (the reduction runs alongside the producer).
module tb_reduction_unit;
  import tb_util_pkg::*;
  import veda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, in_last, in_ready, done;
  sfu_mode_e mode;
  logic [15:0] scale, x, stat0, stat1;
  int rescales = 0;

  reduction_unit dut (.clk, .rst_n, .start, .mode, .scale, .in_valid, .in_last, .x,
    .in_ready, .done, .stat0, .stat1);

  always @(posedge clk) if (dut.state == dut.S_RESCALE) rescales++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [15:0] got, real exp, real rel);
    checks++;
    if (!close(fp2r(got), exp, rel, 0.01)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, fp2r(got), exp);
    end
  endtask

  task automatic run(sfu_mode_e m, int n, real lo, real hi, real sc, bit ramp);
    real v [];
    real mx, es, mean, var_, xs;
    int  waited;
    v = new[n];
    @(negedge clk);
    mode = m; scale = r2fp(sc); start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < n; i++) begin
      logic [15:0] h;
      // a rising ramp forces the running maximum to grow tile after tile
      h = ramp ? r2fp(lo + (hi - lo) * i / n) : rnd_fp(lo, hi);
      v[i] = fp2r(h);
      while (!in_ready || ($urandom % 4 == 0)) @(negedge clk);
      x = h; in_valid = 1; in_last = (i == n - 1);
      @(negedge clk);
      in_valid = 0; in_last = 0;
    end
    waited = 0;
    while (!done && waited < 100) begin
      @(negedge clk);
      waited++;
    end
    checks++;
    if (waited > 2 * 8 + 4) begin
      failures++;
      $display("FAIL statistics %0d cycles after the last element", waited);
    end
    if (m == SFU_SOFTMAX) begin
      mx = -1.0e9;
      for (int i = 0; i < n; i++) begin
        xs = fp2r(r2fp(v[i] * fp2r(scale)));
        if (xs > mx) mx = xs;
      end
      es = 0.0;
      for (int i = 0; i < n; i++) es += $exp(fp2r(r2fp(v[i] * fp2r(scale))) - mx);
      chk("max", stat0, mx, 0.002);
      chk("exp_sum", stat1, es, 0.03);
    end else begin
      mean = 0.0; var_ = 0.0;
      for (int i = 0; i < n; i++) mean += v[i];
      mean /= n;
      for (int i = 0; i < n; i++) var_ += (v[i] - mean) ** 2;
      var_ /= n;
      chk("mean", stat0, mean, 0.03);
      chk("sigma", stat1, $sqrt(var_), 0.05);
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; x = 0; scale = 16'h3C00; mode = SFU_SOFTMAX;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(SFU_SOFTMAX, 37, -4.0, 4.0, 1.0, 0);
    run(SFU_SOFTMAX, 100, -8.0, 8.0, 0.0884, 0);   // 1/sqrt(128)
    run(SFU_SOFTMAX, 64, -3.0, 5.0, 1.0, 1);       // ramp: many rescales
    run(SFU_SOFTMAX, 1, -1.0, 1.0, 1.0, 0);
    run(SFU_LAYERNORM, 128, -2.0, 3.0, 1.0, 0);
    run(SFU_LAYERNORM, 50, 0.5, 1.5, 1.0, 0);
    checks++;
    if (rescales == 0) begin
      failures++;
      $display("FAIL no exp_sum rescale exercised");
    end
    $display("rescales=%0d", rescales);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
