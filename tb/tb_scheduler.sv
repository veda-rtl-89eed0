// tb_scheduler: drives commands into the scheduler alone, with the array,
// SFU and voting engine replaced by simple responders, and checks the control
// sequences cycle by cycle against the timing contract:
//   LOAD   hbm_re at rows a..a+n-1, buffer writes of those rows HBM_LAT later;
//   STORE  buffer port-B reads, HBM writes one cycle later; the vote clear
//          waits for the voting engine;
//   GEMV_INNER  x row read, ld_x one cycle later, one weight read per cycle,
//          ld_w exactly HBM_LAT after each read, no issue while red_ready is
//          low, element writes at row/lane of each result;
//   GEMV_OUTER  element reads, norm_valid 1 cycle later with the lane,
//          ld_bcast 1+NORM_LAT cycles after the read together with the weight
//          row read HBM_LAT before, accumulators written once at the end;
//   ATTN   inner phase, wait for the voting engine, vote_start, outer phase.
module tb_scheduler;
  import veda_pkg::*;

  localparam int HBM_LAT = 2, NORM_LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready, red_ready, red_done, s_valid, vote_busy, done;
  cmd_t cmd, cur;
  ctl_t ctl;

  scheduler dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .red_ready, .red_done,
    .s_valid, .vote_busy, .ctl, .cur, .done);

  // responder: the PE array returns one result 8 cycles after each ld_w
  logic [7:0] sv_pipe;
  always_ff @(posedge clk) sv_pipe <= rst_n ? {sv_pipe[6:0], ctl.arr_ld_w} : '0;
  assign s_valid = sv_pipe[7];

  // event logs (cycle, value)
  int hre_c [$], hre_a [$], ldw_c [$], bwe_c [$], bwe_a [$], bwe_l [$], nv_c [$], nv_l [$];
  int bc_c [$], rae_c [$], rae_a [$], rbe_c [$], rbe_a [$], hwe_c [$], hwe_a [$], ldx_c [$];
  int vstart_c [$], vclr_c [$];
  always @(negedge clk) if (rst_n) begin
    if (ctl.hbm_re) begin hre_c.push_back(cyc); hre_a.push_back(int'(ctl.hbm_raddr)); end
    if (ctl.arr_ld_w) ldw_c.push_back(cyc);
    if (ctl.arr_ld_x) ldx_c.push_back(cyc);
    if (ctl.buf_we) begin bwe_c.push_back(cyc); bwe_a.push_back(int'(ctl.buf_waddr)); bwe_l.push_back(int'(ctl.buf_wlane)); end
    if (ctl.norm_valid) begin nv_c.push_back(cyc); nv_l.push_back(int'(ctl.norm_lane)); end
    if (ctl.arr_ld_bcast) bc_c.push_back(cyc);
    if (ctl.buf_ra_en) begin rae_c.push_back(cyc); rae_a.push_back(int'(ctl.buf_ra_addr)); end
    if (ctl.buf_rb_en) begin rbe_c.push_back(cyc); rbe_a.push_back(int'(ctl.buf_rb_addr)); end
    if (ctl.hbm_we) begin hwe_c.push_back(cyc); hwe_a.push_back(int'(ctl.hbm_waddr)); end
    if (ctl.vote_start) vstart_c.push_back(cyc);
    if (ctl.vote_clr) vclr_c.push_back(cyc);
  end

  task automatic clear_logs();
    hre_c.delete(); hre_a.delete(); ldw_c.delete(); bwe_c.delete(); bwe_a.delete(); bwe_l.delete();
    nv_c.delete(); nv_l.delete(); bc_c.delete(); rae_c.delete(); rae_a.delete(); rbe_c.delete();
    rbe_a.delete(); hwe_c.delete(); hwe_a.delete(); ldx_c.delete(); vstart_c.delete(); vclr_c.delete();
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // red_done one pulse, some cycles after the last reduction element
  int red_last_c = -1;
  always @(negedge clk) if (rst_n && ctl.red_valid && ctl.red_last) red_last_c = cyc;
  always @(negedge clk) red_done = (red_last_c >= 0 && cyc == red_last_c + 3);

  initial begin
    cmd_t c;
    cmd_valid = 0; cmd = '0; red_ready = 1; vote_busy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- LOAD ----------------
    clear_logs();
    c = '0; c.op = OP_LOAD; c.len = 5; c.hbm_a = 24'h40; c.buf_y = 10'd7;
    run(c);
    expect_eq("load reads", hre_c.size(), 5);
    expect_eq("load writes", bwe_c.size(), 5);
    for (int i = 0; i < 5 && i < bwe_c.size(); i++) begin
      expect_eq("load raddr", hre_a[i], 'h40 + i);
      expect_eq("load write delay", bwe_c[i] - hre_c[i], HBM_LAT);
      expect_eq("load waddr", bwe_a[i], 7 + i);
    end

    // ---------------- STORE with vote clear, engine busy for a while ----------------
    clear_logs();
    vote_busy = 1;
    fork
      begin repeat (10) @(negedge clk); vote_busy = 0; end
    join_none
    c = '0; c.op = OP_STORE; c.len = 3; c.buf_x = 10'd12; c.hbm_a = 24'h900; c.vote_clr = 1; c.slot = 12'd77;
    run(c);
    expect_eq("store reads", rbe_c.size(), 3);
    expect_eq("store writes", hwe_c.size(), 3);
    expect_eq("vote clear once", vclr_c.size(), 1);
    if (vclr_c.size() == 1 && rbe_c.size() > 0) expect_eq("vote clear after busy", int'(vclr_c[0] >= rbe_c[0]), 1);
    for (int i = 0; i < 3 && i < hwe_c.size(); i++) begin
      expect_eq("store raddr", rbe_a[i], 12 + i);
      expect_eq("store delay", hwe_c[i] - rbe_c[i], 1);
      expect_eq("store waddr", hwe_a[i], 'h900 + i);
    end

    // ---------------- GEMV_INNER with back-pressure ----------------
    clear_logs();
    c = '0; c.op = OP_GEMV_INNER; c.len = 20; c.hbm_a = 24'h300; c.buf_x = 10'd3; c.buf_y = 10'd50; c.sfu = SFU_LAYERNORM;
    fork
      begin
        repeat (8) @(negedge clk);
        red_ready = 0;
        repeat (5) @(negedge clk);
        red_ready = 1;
      end
    join_none
    run(c);
    expect_eq("inner x reads", rae_c.size(), 1);
    expect_eq("inner ld_x", ldx_c.size(), 1);
    if (rae_c.size() > 0 && ldx_c.size() > 0) expect_eq("ld_x delay", ldx_c[0] - rae_c[0], 1);
    expect_eq("inner weight reads", hre_c.size(), 20);
    expect_eq("inner ld_w", ldw_c.size(), 20);
    expect_eq("inner writes", bwe_c.size(), 20);
    for (int i = 0; i < 20 && i < ldw_c.size(); i++) begin
      expect_eq("inner raddr", hre_a[i], 'h300 + i);
      expect_eq("ld_w delay", ldw_c[i] - hre_c[i], HBM_LAT);
    end
    for (int i = 0; i < 20 && i < bwe_c.size(); i++) expect_eq("inner wlane", bwe_l[i], i);
    // the stall window must show as a gap of at least 5 cycles in the issue stream
    begin
      int gap = 0;
      for (int i = 1; i < hre_c.size(); i++) if (hre_c[i] - hre_c[i-1] > gap) gap = hre_c[i] - hre_c[i-1];
      expect_eq("stall gap", int'(gap >= 5), 1);
    end

    // ---------------- GEMV_OUTER ----------------
    clear_logs();
    c = '0; c.op = OP_GEMV_OUTER; c.len = 140; c.hbm_a = 24'h500; c.buf_x = 10'd60; c.buf_y = 10'd70;
    run(c);
    expect_eq("outer element reads", rae_c.size(), 140);
    expect_eq("outer norm", nv_c.size(), 140);
    expect_eq("outer bcast", bc_c.size(), 140);
    expect_eq("outer weight reads", hre_c.size(), 140);
    for (int i = 0; i < 140 && i < bc_c.size(); i++) begin
      expect_eq("outer row", rae_a[i], 60 + i / 128);
      expect_eq("norm delay", nv_c[i] - rae_c[i], 1);
      expect_eq("norm lane", nv_l[i], i % 128);
      expect_eq("bcast delay", bc_c[i] - rae_c[i], 1 + NORM_LAT);
      expect_eq("weight timing", bc_c[i] - hre_c[i], HBM_LAT);
      expect_eq("outer raddr", hre_a[i], 'h500 + i);
    end
    expect_eq("acc write", bwe_c.size(), 1);
    if (bwe_c.size() == 1) expect_eq("acc row", bwe_a[0], 70);

    // ---------------- ATTN ----------------
    clear_logs();
    vote_busy = 1;
    fork
      begin repeat (40) @(negedge clk); vote_busy = 0; end
    join_none
    c = '0; c.op = OP_ATTN; c.len = 16; c.hbm_a = 24'h1000; c.hbm_b = 24'h2000; c.buf_x = 10'd1; c.buf_s = 10'd90; c.buf_y = 10'd91;
    run(c);
    expect_eq("attn vote start", vstart_c.size(), 1);
    expect_eq("attn reads", hre_c.size(), 32);
    for (int i = 0; i < 16 && i < hre_c.size(); i++) expect_eq("attn K", hre_a[i], 'h1000 + i);
    for (int i = 0; i < 16 && 16 + i < hre_c.size(); i++) expect_eq("attn V", hre_a[16 + i], 'h2000 + i);
    if (vstart_c.size() == 1 && bc_c.size() > 0) expect_eq("outer after vote start", int'(bc_c[0] > vstart_c[0]), 1);
    expect_eq("score writes + output", bwe_c.size(), 17);
    if (bwe_c.size() == 17) begin
      expect_eq("score row", bwe_a[0], 90);
      expect_eq("output row", bwe_a[16], 91);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
