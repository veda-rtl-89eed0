// tb_reconfig_pe: checks the four PE modes on a type-A and a type-B PE against
// products and sums computed in double precision.
module tb_reconfig_pe;
  import tb_util_pkg::*;
  import veda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pe_mode_e mode;
  logic ld_x, ld_w;
  logic [15:0] x, w, pa, pb, prod_a, acc_a, prod_b, acc_b;

  reconfig_pe #(.TYPE_B(1'b0)) dut_a (.clk, .rst_n, .mode, .ld_x, .ld_w, .x, .w,
    .psum_a(pa), .psum_b(pb), .prod(prod_a), .acc(acc_a));
  reconfig_pe #(.TYPE_B(1'b1)) dut_b (.clk, .rst_n, .mode, .ld_x, .ld_w, .x, .w,
    .psum_a(pa), .psum_b(pb), .prod(prod_b), .acc(acc_b));

  task automatic check(string what, logic [15:0] got, real exp);
    checks++;
    if (!close(fp2r(got), exp, 0.01, 0.002)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, fp2r(got), exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_acc, xr, wr, par, pbr;
    mode = PE_DISABLE; ld_x = 0; ld_w = 0; x = 0; w = 0; pa = 0; pb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    mode = PE_CLEAR;
    @(negedge clk);
    check("clear A", acc_a, 0.0);
    check("clear B", acc_b, 0.0);
    // local accumulation: acc += x*w, one new operand pair per cycle
    ref_acc = 0.0;
    for (int i = 0; i < 40; i++) begin
      x = rnd_fp(-2.0, 2.0);
      w = rnd_fp(-2.0, 2.0);
      xr = fp2r(x); wr = fp2r(w);
      ld_x = 1; ld_w = 1; mode = PE_DISABLE;
      @(negedge clk);
      ld_x = 0; ld_w = 0;
      check("prod A", prod_a, xr * wr);
      check("prod B", prod_b, xr * wr);
      mode = PE_LOCAL;
      ref_acc += xr * wr;
      @(negedge clk);
      check("local A", acc_a, ref_acc);
      check("local B", acc_b, ref_acc);
    end
    // disable holds
    mode = PE_DISABLE;
    x = rnd_fp(1.0, 2.0); ld_x = 1;
    repeat (3) @(negedge clk);
    ld_x = 0;
    check("hold A", acc_a, ref_acc);
    check("hold B", acc_b, ref_acc);
    // transmit: A adds psum_a and its product, B adds psum_a and psum_b
    for (int i = 0; i < 40; i++) begin
      x = rnd_fp(-2.0, 2.0); w = rnd_fp(-2.0, 2.0);
      ld_x = 1; ld_w = 1; mode = PE_DISABLE;
      @(negedge clk);
      ld_x = 0; ld_w = 0;
      pa = rnd_fp(-4.0, 4.0); pb = rnd_fp(-4.0, 4.0);
      xr = fp2r(x); wr = fp2r(w); par = fp2r(pa); pbr = fp2r(pb);
      mode = PE_TRANSMIT;
      @(negedge clk);
      check("transmit A", acc_a, par + xr * wr);
      check("transmit B", acc_b, par + pbr);
    end
    mode = PE_CLEAR;
    @(negedge clk);
    check("clear A again", acc_a, 0.0);
    check("clear B again", acc_b, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
