// tb_stats_tracker_full: the tracker at its default size (6 + 244 matchers,
// 2^24 counters) taken through one complete operation: clear all 2^24
// counters, count a stream of events with and without key locality, take a
// snapshot of all 2^24 counters while events keep arriving, count more
// events, drain, and check.
//
// The event keys are recomputed with an own copy of the source LFSR. Checks:
// every snapshot result equals the master-lane count of its key before the
// snapshot began (zero for keys without events, which also proves the clear),
// and afterwards every key that saw events holds master+shadow equal to its
// event count; a sample of untouched words must read zero. Mechanisms are
// counted as in the reduced end-to-end test.
module tb_stats_tracker_full;
  import cq_pkg::*;

  logic clk = 0, mclk = 0, rst = 1, mrst = 1;
  logic ev_enable = 0;
  key_t key_mask = '0;
  logic init_start = 0, snap_start = 0;
  logic init_busy, snap_active;
  logic [MEM_LANES-1:0]            snap_valid;
  key_t [MEM_LANES-1:0]            snap_key;
  logic [MEM_LANES-1:0][CTR_W-1:0] snap_master, snap_shadow;
  logic      [MEM_LANES-1:0] mc_cmd_valid, mc_rd_valid;
  mem_cmd_t  [MEM_LANES-1:0] mc_cmd;
  logic                      mc_ready;
  mem_word_t [MEM_LANES-1:0] mc_rd_data;
  logic ev_taken, stall, conflated0, conflated1, rmw_read, rmw_write, read_held, kind_switch;

  stats_tracker_top dut (.*);

  // Read latency of 60 memory cycles (450 ns at 133 MHz), below the 252-cycle
  // window of the deep stage at the 2.75x faster tracker clock.
  mem_ctrl_model #(.LAT(60), .JITTER(6), .READY_PCT(95)) u_mem (
    .clk (mclk), .rst (mrst), .cmd_valid (mc_cmd_valid), .cmd (mc_cmd), .ready (mc_ready),
    .rd_valid (mc_rd_valid), .rd_data (mc_rd_data)
  );

  always #4  clk  = ~clk;
  always #11 mclk = ~mclk;

  int checks = 0, failures = 0;
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at t=%0t", msg, $time);
  endtask

  logic [31:0] lfsr = 32'h1234_5678;
  int unsigned cnt_m [key_t], cnt_s [key_t], snap_ref [key_t];
  int n_ev = 0, n_stall = 0, n_c0 = 0, n_c1 = 0, n_rd = 0, n_wr = 0, n_held = 0, n_sw = 0, n_shadow = 0;
  bit snap_taken = 0;

  always @(posedge clk) if (!rst) begin
    if (ev_taken) begin
      key_t k;
      k = lfsr[KEY_W-1:0] & key_mask;
      if (dut.snap_s2) begin
        cnt_s[k] = cnt_s.exists(k) ? cnt_s[k] + 1 : 1;
        n_shadow++;
        if (!snap_taken) begin
          snap_taken = 1;
          foreach (cnt_m[kk]) snap_ref[kk] = cnt_m[kk];
        end
      end else cnt_m[k] = cnt_m.exists(k) ? cnt_m[k] + 1 : 1;
      lfsr = (lfsr >> 1) ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      n_ev++;
    end
    if (stall) n_stall++;
    if (conflated0) n_c0++;
    if (conflated1) n_c1++;
    if (rmw_read) n_rd++;
    if (rmw_write) n_wr++;
  end

  longint n_snap = 0;
  always @(posedge mclk) if (!mrst) begin
    if (read_held) n_held++;
    if (kind_switch) n_sw++;
    for (int j = 0; j < MEM_LANES; j++) if (snap_valid[j]) begin
      int unsigned exp_m;
      exp_m = snap_ref.exists(snap_key[j]) ? snap_ref[snap_key[j]] : 0;
      checks++;
      if (snap_master[j] != exp_m || snap_key[j] != key_t'(n_snap))
        fail($sformatf("snapshot key %0h master %0d expected %0d", snap_key[j], snap_master[j], exp_m));
      n_snap++;
    end
  end

  initial begin : watchdog
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_events(int cycles, key_t mask);
    @(negedge clk);
    key_mask = mask;
    ev_enable = 1;
    repeat (cycles) @(negedge clk);
    ev_enable = 0;
  endtask

  initial begin
    repeat (4) @(posedge mclk);
    @(negedge mclk); rst = 0; mrst = 0;
    @(negedge mclk) init_start = 1;
    @(negedge mclk) init_start = 0;
    wait (!init_busy);
    $display("cleared 2^%0d counters at t=%0t", KEY_W, $time);
    run_events(20000, '1);
    run_events(20000, key_t'(255));
    run_events(10000, key_t'(3));
    fork
      run_events(20000, key_t'(1023));
      begin
        @(negedge mclk) snap_start = 1;
        @(negedge mclk) snap_start = 0;
      end
    join
    wait (!snap_active);
    run_events(10000, key_t'(1023));
    repeat (3000) @(negedge mclk);
    checks++;
    if (n_rd != n_wr) fail($sformatf("reads %0d writes %0d after drain", n_rd, n_wr));
    foreach (cnt_m[k]) begin
      mem_word_t w;
      longint unsigned exp_t;
      w = u_mem.peek(k);
      exp_t = cnt_m[k] + (cnt_s.exists(k) ? cnt_s[k] : 0);
      checks++;
      if (longint'(w[CTR_W-1:0]) + longint'(w[2*CTR_W-1:CTR_W]) != exp_t)
        fail($sformatf("word %0h holds %0d+%0d, expected %0d", k, w[CTR_W-1:0], w[2*CTR_W-1:CTR_W], exp_t));
    end
    for (int i = 0; i < 1000; i++) begin
      key_t a;
      a = key_t'($urandom);
      if (!cnt_m.exists(a) && !cnt_s.exists(a)) begin
        checks++;
        if (u_mem.peek(a) != '0) fail($sformatf("untouched word %0h not zero", a));
      end
    end
    checks++; if (n_snap != (longint'(1) << KEY_W)) fail($sformatf("snapshot delivered %0d words", n_snap));
    checks++; if (n_stall == 0) fail("no stall");
    checks++; if (n_c0 == 0) fail("no stage 0 conflation");
    checks++; if (n_c1 == 0) fail("no stage 1 conflation");
    checks++; if (n_held == 0) fail("no read held behind a write");
    checks++; if (n_sw == 0) fail("no kind switch");
    checks++; if (n_shadow == 0) fail("no shadow designation");
    $display("events=%0d stalls=%0d conf0=%0d conf1=%0d reads=%0d writes=%0d held=%0d switches=%0d shadow=%0d snap=%0d",
             n_ev, n_stall, n_c0, n_c1, n_rd, n_wr, n_held, n_sw, n_shadow, n_snap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
