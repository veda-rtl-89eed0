// tb_veda_top: end-to-end test of the accelerator at its default parameters.
//
// An HBM model holds K and V rows of a KV cache, weight rows and input
// vectors.  The test loads vectors into the on-chip buffer, runs attention
// heads (q*K^T, online softmax, s'*V with the normalized scores voting),
// a layer-norm fused pair of GEMVs (inner-product GEMV with element-serial
// layernorm reduction, then outer-product GEMV with layernorm normalization on
// its serial input), GEMVs with weights reused from the buffer, and a store of
// a new kv vector into the evicted slot with its vote count cleared.  Every
// numeric result is compared with a double-precision reference; cycle counts of
// the attention heads are checked against the element-serial schedule
// (about 2*l cycles plus pipeline fill, no separate softmax pass).  Each
// mechanism (reduction back-pressure, exp_sum rescale, inner/outer switch,
// eviction, reserved stage, buffer weights, load, store, vote clear, layernorm
// reduction and normalization) must occur at least once.
module tb_veda_top;
  import tb_util_pkg::*;
  import veda_pkg::*;
  import fp16_pkg::fp16_t;

  localparam int D = 128;
  localparam int HBM_LAT = 2;
  localparam logic [23:0] K_BASE = 24'h1000, V_BASE = 24'h0800, W_BASE = 24'h0400, X_BASE = 24'h0100;

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

  hbm_model #(.LAT(HBM_LAT)) hbm (.clk, .re(hbm_re), .raddr(hbm_raddr), .rdata(hbm_rdata),
    .we(hbm_we), .waddr(hbm_waddr), .wdata(hbm_wdata));

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_rescale = 0, n_switch = 0, n_evict = 0, n_reserved = 0, n_wbuf = 0;
  int n_load = 0, n_store = 0, n_clr = 0, n_ln_red = 0, n_ln_norm = 0, n_votes = 0;
  logic inner_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sched.state == dut.u_sched.S_INNER_RUN && dut.u_sched.iss < dut.u_sched.c.len
        && dut.u_sched.use_red && !dut.red_ready) n_stall++;
    if (dut.u_red.state == dut.u_red.S_RESCALE) n_rescale++;
    inner_q <= dut.ctl.arr_inner;
    if (inner_q && !dut.ctl.arr_inner) n_switch++;
    if (evict_valid) n_evict++;
    if (dut.ctl.vote_start && !(dut.cur.token_idx >= 32)) n_reserved++;
    if (dut.ctl.buf_rb_en && dut.ctl.w_from_buf && !dut.ctl.hbm_we && dut.u_sched.state != dut.u_sched.S_STORE) n_wbuf++;
    if (dut.ctl.buf_we && dut.ctl.buf_wsel == WSEL_HBM) n_load++;
    if (hbm_we) n_store++;
    if (dut.ctl.vote_clr) n_clr++;
    if (dut.ctl.red_valid && dut.ctl.red_mode == SFU_LAYERNORM) n_ln_red++;
    if (dut.ctl.norm_valid && dut.ctl.norm_mode == SFU_LAYERNORM) n_ln_norm++;
    if (dut.u_vote.v1 && dut.u_vote.vote) n_votes++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if ($test$plusargs("trace") && dut.u_sched.state != $past(dut.u_sched.state)) $display("%0d state %s", cyc, dut.u_sched.state.name());
  // ---------------- helpers ----------------
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

  // attention reference: o = softmax(scale * q.K^T) V over slots 0..l-1
  task automatic attn_check(string tag, int qrow, int orow, int l, logic [23:0] kb, logic [23:0] vb);
    real sc [], mx, es, o;
    sc = new[l];
    mx = -1.0e9;
    for (int t = 0; t < l; t++) begin
      sc[t] = 0.0;
      for (int i = 0; i < D; i++) sc[t] += bf(qrow, i) * hb(kb + 24'(t), i);
      sc[t] = sc[t] / $sqrt(128.0);
      if (sc[t] > mx) mx = sc[t];
    end
    es = 0.0;
    for (int t = 0; t < l; t++) es += $exp(sc[t] - mx);
    for (int i = 0; i < D; i++) begin
      o = 0.0;
      for (int t = 0; t < l; t++) o += $exp(sc[t] - mx) / es * hb(vb + 24'(t), i);
      chk({tag, " o"}, bf(orow, i), o, 0.06, 0.02);
    end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    cmd_t c;
    int cy, l;
    real xln [], mean, sig, y;
    cmd_valid = 0; cmd = '0;
    // HBM contents: K/V rows for 320 slots, a ramped K set, weights, inputs
    for (int t = 0; t < 320; t++)
      for (int i = 0; i < D; i++) begin
        hbm.mem[K_BASE + 24'(t)][i] = rnd_fp(-1.0, 1.0);
        hbm.mem[V_BASE + 24'(t)][i] = rnd_fp(-1.0, 1.0);
      end
    for (int r = 0; r < 64; r++)
      for (int i = 0; i < D; i++) hbm.mem[W_BASE + 24'(r)][i] = rnd_fp(-0.25, 0.25);
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < D; i++) hbm.mem[X_BASE + 24'(r)][i] = rnd_fp(-1.0, 1.0);
    // scores rising slot after slot: K row t = (t/64) * q  (q = X row 0)
    for (int t = 0; t < 256; t++)
      for (int i = 0; i < D; i++)
        hbm.mem[24'h2000 + 24'(t)][i] = r2fp(hb(X_BASE, i) * t / 64.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (vote_busy) @(negedge clk);   // vote buffer sweep after reset

    // 1. LOAD four input rows into buffer rows 0..3
    c = mk(OP_LOAD, 4); c.hbm_a = X_BASE; c.buf_y = 10'd0;
    run(c, cy);
    for (int r = 0; r < 4; r++) for (int i = 0; i < D; i += 17) chk("load", bf(r, i), hb(X_BASE + 24'(r), i), 0.0, 0.0);

    // 2. reserved-stage head (token 10, prefill): no voting
    c = mk(OP_ATTN, 11); c.hbm_a = K_BASE; c.hbm_b = V_BASE; c.buf_x = 10'd1; c.buf_y = 10'd20; c.buf_s = 10'd100;
    c.token_idx = 13'd10; c.last_head = 1;
    run(c, cy);
    attn_check("reserved", 1, 20, 11, K_BASE, V_BASE);

    // 3. generation token 300 over a 300-slot cache, two heads; eviction on the last
    l = 300;
    for (int h = 0; h < 2; h++) begin
      c = mk(OP_ATTN, l); c.hbm_a = K_BASE; c.hbm_b = V_BASE; c.buf_x = 10'(1 + h); c.buf_y = 10'(21 + h);
      c.buf_s = 10'd100; c.token_idx = 13'd300; c.gen_phase = 1; c.last_head = (h == 1);
      run(c, cy);
      attn_check("gen", 1 + h, 21 + h, l, K_BASE, V_BASE);
      checks++;
      if (cy > 2 * l + 48) begin
        failures++;
        $display("FAIL attention head took %0d cycles for l=%0d", cy, l);
      end
      $display("attention head l=%0d: %0d cycles", l, cy);
    end
    while (vote_busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (n_evict == 0 || evict_idx >= 12'(l)) begin
      failures++;
      $display("FAIL eviction index %0d (%0d evictions)", evict_idx, n_evict);
    end

    // 4. ramped scores (q = X row 0): the running max grows every tile
    c = mk(OP_ATTN, 256); c.hbm_a = 24'h2000; c.hbm_b = V_BASE; c.buf_x = 10'd0; c.buf_y = 10'd23;
    c.buf_s = 10'd100; c.token_idx = 13'd256; c.gen_phase = 0; c.last_head = 0;
    run(c, cy);
    attn_check("ramp", 0, 23, 256, 24'h2000, V_BASE);
    $display("ramped attention head l=256: %0d cycles", cy);

    // 5. inner GEMV y[j] = x . W[j] (j < 48) with layernorm reduction
    c = mk(OP_GEMV_INNER, 48); c.hbm_a = W_BASE; c.buf_x = 10'd3; c.buf_y = 10'd30; c.sfu = SFU_LAYERNORM;
    run(c, cy);
    xln = new[48];
    mean = 0.0;
    for (int j = 0; j < 48; j++) begin
      y = 0.0;
      for (int i = 0; i < D; i++) y += bf(3, i) * hb(W_BASE + 24'(j), i);
      chk("gemv inner", bf(30, j), y, 0.03, 0.01);
      xln[j] = bf(30, j);
      mean += xln[j];
    end
    mean /= 48.0;
    sig = 0.0;
    for (int j = 0; j < 48; j++) sig += (xln[j] - mean) ** 2;
    sig = $sqrt(sig / 48.0);
    chk("ln mean", fp2r(dut.stat0), mean, 0.05, 0.01);
    chk("ln sigma", fp2r(dut.stat1), sig, 0.05, 0.01);

    // 6. outer GEMV z = sum_j LN(y)[j] * W[j] with layernorm on the serial input
    c = mk(OP_GEMV_OUTER, 48); c.hbm_a = W_BASE; c.buf_x = 10'd30; c.buf_y = 10'd31; c.sfu = SFU_LAYERNORM;
    run(c, cy);
    for (int i = 0; i < D; i++) begin
      y = 0.0;
      for (int j = 0; j < 48; j++) y += (xln[j] - fp2r(dut.stat0)) / fp2r(dut.stat1) * hb(W_BASE + 24'(j), i);
      chk("gemv outer ln", bf(31, i), y, 0.05, 0.03);
    end

    // 7. weights reused from the buffer: LOAD 16 weight rows, inner and outer GEMV on them
    c = mk(OP_LOAD, 16); c.hbm_a = W_BASE + 24'd16; c.buf_y = 10'd200;
    run(c, cy);
    c = mk(OP_GEMV_INNER, 16); c.buf_s = 10'd200; c.w_from_buf = 1; c.buf_x = 10'd2; c.buf_y = 10'd40;
    run(c, cy);
    for (int j = 0; j < 16; j++) begin
      y = 0.0;
      for (int i = 0; i < D; i++) y += bf(2, i) * bf(200 + j, i);
      chk("gemv inner buf", bf(40, j), y, 0.03, 0.01);
    end
    c = mk(OP_GEMV_OUTER, 16); c.buf_s = 10'd200; c.w_from_buf = 1; c.buf_x = 10'd40; c.buf_y = 10'd41; c.sfu = SFU_NONE;
    run(c, cy);
    for (int i = 0; i < D; i++) begin
      y = 0.0;
      for (int j = 0; j < 16; j++) y += bf(40, j) * bf(200 + j, i);
      chk("gemv outer buf", bf(41, i), y, 0.05, 0.03);
    end

    // 8. the new token's K vector (buffer row 41) goes into the evicted slot
    c = mk(OP_STORE, 1); c.buf_x = 10'd41; c.hbm_a = K_BASE + 24'(evict_idx); c.vote_clr = 1; c.slot = evict_idx;
    run(c, cy);
    for (int i = 0; i < D; i += 9) chk("store", hb(K_BASE + 24'(evict_idx), i), bf(41, i), 0.0, 0.0);
    checks++;
    if (dut.u_vote.counts[evict_idx] != 0) begin
      failures++;
      $display("FAIL vote count of slot %0d not cleared", evict_idx);
    end

    // ---------------- mechanism coverage ----------------
    $display("stalls=%0d rescales=%0d switches=%0d evictions=%0d reserved=%0d buf_weights=%0d loads=%0d stores=%0d clears=%0d ln_red=%0d ln_norm=%0d votes=%0d",
      n_stall, n_rescale, n_switch, n_evict, n_reserved, n_wbuf, n_load, n_store, n_clr, n_ln_red, n_ln_norm, n_votes);
    begin
      int cov [12];
      cov = '{n_stall, n_rescale, n_switch, n_evict, n_reserved, n_wbuf, n_load, n_store, n_clr, n_ln_red, n_ln_norm, n_votes};
      for (int k = 0; k < 12; k++) begin
        checks++;
        if (cov[k] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
