// tb_voting_engine: runs several heads and tokens through the voting engine
// and compares against a reference model of the voting algorithm: threshold
// a*(1/l) - b*sigma (checked against a double-precision value), one vote per
// score below it, a vote for the minimum when the threshold is not positive,
// no votes in the reserved stage, layer-wise accumulation over heads, eviction
// index = earliest slot with the largest count on the last head of a
// generation-phase token, and the slot clear port.  Also checks the cycle
// count of one head (l collect + 3 threshold + l + 1 vote cycles, +-2).
module tb_voting_engine;
  import tb_util_pkg::*;

  localparam int ML = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, gen_phase, last_head, in_valid, clr_valid, busy, evict_valid;
  logic [12:0] len, token_idx;
  logic [15:0] s, threshold;
  logic [11:0] clr_idx, evict_idx;

  voting_engine dut (.clk, .rst_n, .start, .len, .token_idx, .gen_phase, .last_head,
    .in_valid, .s, .clr_valid, .clr_idx, .busy, .evict_valid, .evict_idx, .threshold);

  int ref_cnt [ML];
  int n_evict = 0, n_minvote = 0, n_reserved = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic head(int l, int tok, bit gen, bit last, bit spike);
    logic [15:0] sv [];
    real raw [], tot, mean, sq, sig, thr, mn;
    int  mi, t0, cycles, best, bestc;
    sv = new[l]; raw = new[l];
    tot = 0.0;
    for (int i = 0; i < l; i++) begin
      raw[i] = 0.05 + real'($urandom % 1000) / 1000.0;
      if (spike && i == l / 3) raw[i] = 400.0;
      tot += raw[i];
    end
    for (int i = 0; i < l; i++) sv[i] = r2fp(raw[i] / tot);
    while (busy) @(negedge clk);
    len = 13'(l); token_idx = 13'(tok); gen_phase = gen; last_head = last; start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < l; i++) begin
      s = sv[i]; in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    while (busy) @(negedge clk);
    cycles = ($time - t0) / 10;
    if (tok < 32) begin
      n_reserved++;
      return;
    end
    checks++;
    if (cycles < 2 * l + 2 || cycles > 2 * l + 6) begin
      failures++;
      $display("FAIL head took %0d cycles for l=%0d", cycles, l);
    end
    // reference threshold from the FP16 scores
    mean = 1.0 / l; sq = 0.0; mn = 1.0e9; mi = 0;
    for (int i = 0; i < l; i++) begin
      sq += fp2r(sv[i]) ** 2;
      if (fp2r(sv[i]) < mn) begin mn = fp2r(sv[i]); mi = i; end
    end
    sig = $sqrt(sq / l - mean * mean);
    thr = mean - 0.2 * sig;
    checks++;
    if (!close(fp2r(threshold), thr, 0.05, 0.0005)) begin
      failures++;
      $display("FAIL threshold got %f expected %f", fp2r(threshold), thr);
    end
    // votes against the engine's own threshold value
    if (fp2r(threshold) > 0.0) begin
      for (int i = 0; i < l; i++) if (fp2r(sv[i]) < fp2r(threshold)) ref_cnt[i]++;
    end else begin
      ref_cnt[mi]++;
      n_minvote++;
    end
    for (int i = 0; i < l; i++) begin
      checks++;
      if (dut.counts[i] != 16'(ref_cnt[i])) begin
        failures++;
        $display("FAIL count[%0d] = %0d expected %0d", i, dut.counts[i], ref_cnt[i]);
      end
    end
    if (gen && last) begin
      best = 0; bestc = -1;
      for (int i = 0; i < l; i++) if (ref_cnt[i] > bestc) begin bestc = ref_cnt[i]; best = i; end
      checks++;
      if (evict_idx != 12'(best)) begin
        failures++;
        $display("FAIL evict_idx %0d expected %0d", evict_idx, best);
      end
      n_evict++;
    end
  endtask

  always @(posedge clk) if (rst_n && evict_valid) begin
    checks++;
    if (!(dut.gen_r && dut.last_r)) begin
      failures++;
      $display("FAIL evict_valid outside a generation last head t=%0t gen=%0d last=%0d", $time, dut.gen_r, dut.last_r);
    end
  end

  initial begin
    start = 0; in_valid = 0; clr_valid = 0; len = 0; token_idx = 0; gen_phase = 0; last_head = 0; s = 0; clr_idx = 0;
    for (int i = 0; i < ML; i++) ref_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reserved stage: tokens 0..31 vote nothing
    head(20, 19, 0, 1, 0);
    // prefilling voting stage: 2 heads per token
    for (int t = 40; t < 44; t++) begin
      head(t + 1, t, 0, 0, 0);
      head(t + 1, t, 0, 1, t == 42);
    end
    // generation: fixed cache of 44 slots, eviction on the last head
    for (int t = 44; t < 50; t++) begin
      head(44, t, 1, 0, 0);
      head(44, t, 1, 1, 0);
      // the host overwrites the evicted slot and clears its votes
      @(negedge clk);
      clr_idx = evict_idx; clr_valid = 1;
      ref_cnt[evict_idx] = 0;
      @(negedge clk);
      clr_valid = 0;
      checks++;
      if (dut.counts[clr_idx] != 0) begin
        failures++;
        $display("FAIL slot %0d not cleared", clr_idx);
      end
    end
    head(300, 60, 1, 1, 1);
    checks++;
    if (n_minvote == 0 || n_evict == 0 || n_reserved == 0) begin
      failures++;
      $display("FAIL not every case exercised: minvote=%0d evict=%0d reserved=%0d", n_minvote, n_evict, n_reserved);
    end
    $display("minvote=%0d evict=%0d reserved=%0d", n_minvote, n_evict, n_reserved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
