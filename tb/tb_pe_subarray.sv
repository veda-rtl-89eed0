// tb_pe_subarray: one 8x8 block.  Inner-product configuration: each weight
// row loaded at cycle c must give its 64-element dot product on tree_out at
// cycle c+7 and tree_out + ext_b on comb_out at c+8.  Outer-product
// configuration: local accumulation of x*w in all 64 PEs, clear and hold.
module tb_pe_subarray;
  import tb_util_pkg::*;

  localparam int L = 64;
  localparam int NROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inner, ld_x, ld_w, acc_en, acc_clr, comb_en;
  logic [L-1:0][15:0] x, w, acc;
  logic [15:0] ext_b, tree_out, comb_out;

  pe_subarray dut (.clk, .rst_n, .inner, .ld_x, .ld_w, .acc_en, .acc_clr, .comb_en,
    .x, .w, .ext_b, .tree_out, .comb_out, .acc);

  real expd [NROWS];
  logic [15:0] ebv [NROWS];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_acc [L];
    inner = 1; ld_x = 0; ld_w = 0; acc_en = 0; acc_clr = 0; comb_en = 1; x = '0; w = '0; ext_b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < L; i++) x[i] = rnd_fp(-1.0, 1.0);
    ld_x = 1;
    @(negedge clk);
    ld_x = 0;
    // issue NROWS rows on consecutive cycles, check results as they drain
    for (int c = 0; c < NROWS + 8; c++) begin
      if (c < NROWS) begin
        expd[c] = 0.0;
        for (int i = 0; i < L; i++) begin
          w[i] = rnd_fp(-1.0, 1.0);
          expd[c] += fp2r(x[i]) * fp2r(w[i]);
        end
        ebv[c] = rnd_fp(-2.0, 2.0);
        ld_w = 1;
      end else ld_w = 0;
      // ext_b must accompany tree_out of row c-7
      if (c >= 7 && c - 7 < NROWS) ext_b = ebv[c-7];
      @(negedge clk);
      if (c >= 6 && c - 6 < NROWS) begin
        checks++;
        if (!close(fp2r(tree_out), expd[c-6], 0.02, 0.04)) begin
          failures++;
          $display("FAIL tree row %0d: got %f expected %f", c - 6, fp2r(tree_out), expd[c-6]);
        end
      end
      if (c >= 7 && c - 7 < NROWS) begin
        checks++;
        if (!close(fp2r(comb_out), expd[c-7] + fp2r(ebv[c-7]), 0.02, 0.05)) begin
          failures++;
          $display("FAIL comb row %0d: got %f expected %f", c - 7, fp2r(comb_out), expd[c-7] + fp2r(ebv[c-7]));
        end
      end
    end
    // outer product
    inner = 0;
    acc_clr = 1;
    @(negedge clk);
    acc_clr = 0;
    for (int i = 0; i < L; i++) ref_acc[i] = 0.0;
    for (int t = 0; t < 12; t++) begin
      logic [15:0] xs;
      xs = rnd_fp(-1.0, 1.0);
      for (int i = 0; i < L; i++) begin
        x[i] = xs;
        w[i] = rnd_fp(-1.0, 1.0);
        ref_acc[i] += fp2r(xs) * fp2r(w[i]);
      end
      ld_x = 1; ld_w = 1; acc_en = 0;
      @(negedge clk);
      ld_x = 0; ld_w = 0; acc_en = 1;
      @(negedge clk);
      acc_en = 0;
    end
    repeat (3) @(negedge clk);
    for (int i = 0; i < L; i++) begin
      checks++;
      if (!close(fp2r(acc[i]), ref_acc[i], 0.02, 0.02)) begin
        failures++;
        $display("FAIL outer lane %0d: got %f expected %f", i, fp2r(acc[i]), ref_acc[i]);
      end
    end
    acc_clr = 1;
    @(negedge clk);
    acc_clr = 0;
    for (int i = 0; i < L; i++) begin
      checks++;
      if (fp2r(acc[i]) != 0.0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
