// tb_normalization_unit: streams elements in all three modes and checks every
// output value and the fixed 3-cycle latency.
module tb_normalization_unit;
  import tb_util_pkg::*;
  import veda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sfu_mode_e mode;
  logic in_valid, out_valid;
  logic [15:0] stat0, stat1, x, y;

  normalization_unit dut (.clk, .rst_n, .mode, .stat0, .stat1, .in_valid, .x, .out_valid, .y);

  real exp_q [$];
  int  cyc_q [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    real e;
    int  c;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      e = exp_q.pop_front();
      c = cyc_q.pop_front();
      if (!close(fp2r(y), e, 0.02, 0.002)) begin
        failures++;
        $display("FAIL mode %0d: got %f expected %f", mode, fp2r(y), e);
      end
      checks++;
      if (cyc - c != 3) begin
        failures++;
        $display("FAIL latency %0d", cyc - c);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream(sfu_mode_e m, real s0, real s1, int n);
    mode = m; stat0 = r2fp(s0); stat1 = r2fp(s1);
    for (int i = 0; i < n; i++) begin
      real xr, e;
      x = rnd_fp(-6.0, 2.0);
      xr = fp2r(x);
      unique case (m)
        SFU_SOFTMAX:   e = $exp(xr - fp2r(stat0)) / fp2r(stat1);
        SFU_LAYERNORM: e = (xr - fp2r(stat0)) / fp2r(stat1);
        default:       e = xr;
      endcase
      in_valid = ($urandom % 5 != 0);
      if (in_valid) begin
        exp_q.push_back(e);
        cyc_q.push_back(cyc);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; x = 0; mode = SFU_NONE; stat0 = 0; stat1 = 16'h3C00;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    stream(SFU_SOFTMAX, 2.0, 7.5, 60);
    stream(SFU_LAYERNORM, -1.5, 2.25, 60);
    stream(SFU_NONE, 0.0, 1.0, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
