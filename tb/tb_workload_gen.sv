// tb_workload_gen: generation phase with a fixed-size KV cache, at the
// accelerator's default parameters.
//
// This is the eviction workload in miniature: the cache holds S slots (S=64
// here, standing for 512 x compression ratio), and each generated token runs two
// attention heads over the full cache with voting on. On the last head the
// voting engine names the slot with the most votes. The token's new K and V rows
// are then stored into that slot, and the slot's vote count is cleared, so the
// cache length stays S for every step.
//
// Checks for each step:
//   - the attention output of both heads, against a double-precision
//     reference computed from the HBM contents at that step;
//   - the cycle count of each head, which must stay within 2*S + 48 whatever
//     the token index (the cache does not grow);
//   - the eviction index, which must be the earliest slot with the largest
//     vote count, taken from the engine's count memory;
//   - that the stored K and V rows landed in the evicted slot;
//   - that the evicted slot's count was cleared.
// The slot chosen, the cache length and the schedule are this test's own; the
// rule being checked (evict the most-voted slot, earliest on ties) is the
// algorithm's.
module tb_workload_gen;
  import tb_util_pkg::*;
  import veda_pkg::*;
  import fp16_pkg::fp16_t;

  localparam int D = 128;
  localparam int S = 64;       // cache slots
  localparam int STEPS = 8;    // generated tokens
  localparam int T0 = 64;      // index of the first generated token
  localparam logic [23:0] K_BASE = 24'h1000, V_BASE = 24'h0800, NEW_BASE = 24'h0100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready, cmd_done, hbm_re, hbm_we, evict_valid, vote_busy;
  cmd_t cmd;
  logic [23:0] hbm_raddr, hbm_waddr;
  row_t hbm_rdata, hbm_wdata;
  logic [11:0] evict_idx;

  veda_top dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done,
    .hbm_re, .hbm_raddr, .hbm_rdata, .hbm_we, .hbm_waddr, .hbm_wdata,
    .evict_valid, .evict_idx, .vote_busy);

  hbm_model #(.LAT(2)) hbm (.clk, .re(hbm_re), .raddr(hbm_raddr), .rdata(hbm_rdata),
    .we(hbm_we), .waddr(hbm_waddr), .wdata(hbm_wdata));

  int n_evict = 0;
  always @(posedge clk) if (rst_n && evict_valid) n_evict++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real hb(logic [23:0] row, int lane);
    return fp2r(hbm.mem[row][lane]);
  endfunction
  function automatic real bf(int row, int lane);
    return fp2r(dut.u_buf.mem[row][lane]);
  endfunction

  task automatic chk(string what, real got, real exp, real rel, real abs_tol);
    checks++;
    if (!close(got, exp, rel, abs_tol)) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run(cmd_t c, output int cycles);
    int t0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    t0 = cyc;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  function automatic cmd_t mk(op_e op, int len);
    cmd_t c;
    c = '0;
    c.op = op; c.len = 13'(len); c.scale = r2fp(1.0 / $sqrt(128.0));
    return c;
  endfunction

  task automatic attn_check(int step, int qrow, int orow);
    real sc [S], mx, es, o;
    mx = -1.0e9;
    for (int t = 0; t < S; t++) begin
      sc[t] = 0.0;
      for (int i = 0; i < D; i++) sc[t] += bf(qrow, i) * hb(K_BASE + 24'(t), i);
      sc[t] = sc[t] / $sqrt(128.0);
      if (sc[t] > mx) mx = sc[t];
    end
    es = 0.0;
    for (int t = 0; t < S; t++) es += $exp(sc[t] - mx);
    for (int i = 0; i < D; i++) begin
      o = 0.0;
      for (int t = 0; t < S; t++) o += $exp(sc[t] - mx) / es * hb(V_BASE + 24'(t), i);
      chk($sformatf("step %0d o", step), bf(orow, i), o, 0.06, 0.02);
    end
  endtask

  initial begin
    cmd_t c;
    int cy, best, ev, ev_before;
    cmd_valid = 0; cmd = '0;
    // cache contents, and per step: two queries, a new K row and a new V row
    for (int t = 0; t < S; t++)
      for (int i = 0; i < D; i++) begin
        hbm.mem[K_BASE + 24'(t)][i] = rnd_fp(-1.0, 1.0);
        hbm.mem[V_BASE + 24'(t)][i] = rnd_fp(-1.0, 1.0);
      end
    for (int r = 0; r < 4 * STEPS; r++)
      for (int i = 0; i < D; i++) hbm.mem[NEW_BASE + 24'(r)][i] = rnd_fp(-1.0, 1.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (vote_busy) @(negedge clk);

    for (int s = 0; s < STEPS; s++) begin
      // queries of both heads and the token's new K, V into buffer rows 1..4
      c = mk(OP_LOAD, 4); c.hbm_a = NEW_BASE + 24'(4 * s); c.buf_y = 10'd1;
      run(c, cy);
      ev_before = n_evict;
      for (int h = 0; h < 2; h++) begin
        c = mk(OP_ATTN, S); c.hbm_a = K_BASE; c.hbm_b = V_BASE; c.buf_x = 10'(1 + h);
        c.buf_y = 10'(10 + h); c.buf_s = 10'd100; c.token_idx = 13'(T0 + s);
        c.gen_phase = 1; c.last_head = (h == 1);
        run(c, cy);
        attn_check(s, 1 + h, 10 + h);
        checks++;
        if (cy > 2 * S + 48) begin
          failures++;
          $display("FAIL step %0d head %0d took %0d cycles", s, h, cy);
        end
      end
      while (vote_busy) @(negedge clk);
      @(negedge clk);
      // the eviction index must be the earliest slot with the largest count
      best = 0;
      for (int t = 1; t < S; t++) if (dut.u_vote.counts[t] > dut.u_vote.counts[best]) best = t;
      ev = int'(evict_idx);
      checks++;
      if (n_evict != ev_before + 1 || ev != best) begin
        failures++;
        $display("FAIL step %0d: eviction index %0d, expected %0d (count %0d)", s, ev, best,
                 dut.u_vote.counts[best]);
      end
      $display("token %0d: heads of %0d cycles, evict slot %0d (votes %0d)", T0 + s, cy, ev,
               dut.u_vote.counts[best]);
      // the new K and V rows overwrite the evicted slot; its count restarts at 0
      c = mk(OP_STORE, 1); c.buf_x = 10'd3; c.hbm_a = K_BASE + 24'(ev); c.vote_clr = 1; c.slot = 12'(ev);
      run(c, cy);
      c = mk(OP_STORE, 1); c.buf_x = 10'd4; c.hbm_a = V_BASE + 24'(ev);
      run(c, cy);
      while (vote_busy) @(negedge clk);
      @(negedge clk);
      for (int i = 0; i < D; i += 7) begin
        chk("new K", hb(K_BASE + 24'(ev), i), bf(3, i), 0.0, 0.0);
        chk("new V", hb(V_BASE + 24'(ev), i), bf(4, i), 0.0, 0.0);
      end
      checks++;
      if (dut.u_vote.counts[ev] != 0) begin
        failures++;
        $display("FAIL step %0d: count of slot %0d not cleared", s, ev);
      end
    end
    checks++;
    if (n_evict != STEPS) begin
      failures++;
      $display("FAIL %0d evictions for %0d tokens", n_evict, STEPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
