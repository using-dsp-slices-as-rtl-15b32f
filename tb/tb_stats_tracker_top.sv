// tb_stats_tracker_top: end-to-end test of the event tracker with the
// behavioural memory controller model.
//
// Sizes are reduced for simulation time: stage 1 has N1=40 matchers (with the
// full six feedback stages), the counter memory WORDS=4096 words, and the
// crossing FIFOs are small enough to provoke backpressure. The fast clock
// runs 2.75 times faster than the memory clock, close to the 375 MHz /
// 133.25 MHz ratio of the evaluated system.
//
// Sequence: initialise all counters; stream pseudo-random events over wide
// and narrow key ranges; take a snapshot while events keep flowing; stream
// again; stop and drain. The testbench recomputes the event keys with its own
// copy of the LFSR and counts, per key, events designated to the master and
// the shadow lane (the lane is observed where the design designates it). It
// checks that initialization cleared every word, that each snapshot result
// shows exactly the master-lane events that preceded the snapshot, and that
// in the end every word holds master+shadow equal to the events of its key.
// Every mechanism (stall, conflation in both stages, read and write back,
// read held behind a write, kind switch, shadow designation, shadow fold)
// must occur at least once.
module tb_stats_tracker_top;
  import cq_pkg::*;

  localparam longint unsigned WORDS = 4096;
  localparam int unsigned N1 = 40;

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

  stats_tracker_top #(
    .N1(N1), .WORDS(WORDS), .REQ_DEPTH(32), .REPLY_DEPTH(128)
  ) dut (.*);

  mem_ctrl_model #(.LAT(15), .JITTER(4), .READY_PCT(85)) u_mem (
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

  // ---------------------------------------------------------- event model
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

  // ------------------------------------------------------- snapshot results
  int n_snap = 0;
  always @(posedge mclk) if (!mrst) begin
    if (read_held) n_held++;
    if (kind_switch) n_sw++;
    for (int j = 0; j < MEM_LANES; j++) if (snap_valid[j]) begin
      int unsigned exp_m;
      exp_m = snap_ref.exists(snap_key[j]) ? snap_ref[snap_key[j]] : 0;
      checks++;
      if (snap_master[j] != exp_m)
        fail($sformatf("snapshot key %0h master %0d expected %0d", snap_key[j], snap_master[j], exp_m));
      n_snap++;
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
    // 1) initialization
    @(negedge mclk) init_start = 1;
    @(negedge mclk) init_start = 0;
    wait (!init_busy);
    repeat (60) @(negedge mclk);
    for (int unsigned a = 0; a < WORDS; a++) begin
      checks++;
      if (u_mem.peek(key_t'(a)) != '0) fail($sformatf("word %0h not cleared", a));
    end
    // 2) events over the whole counter range, then with locality
    run_events(6000, key_t'(WORDS - 1));
    run_events(6000, key_t'(15));
    run_events(3000, key_t'(3));
    // 3) snapshot while events flow
    fork
      run_events(12000, key_t'(63));
      begin
        @(negedge mclk) snap_start = 1;
        @(negedge mclk) snap_start = 0;
      end
    join
    wait (!snap_active);
    // 4) events after the snapshot (fold shadow into master)
    run_events(4000, key_t'(63));
    // 5) drain
    repeat (2000) @(negedge mclk);
    checks++;
    if (n_rd != n_wr) fail($sformatf("reads %0d writes %0d after drain", n_rd, n_wr));
    begin
      int folded = 0;
      for (int unsigned a = 0; a < WORDS; a++) begin
        mem_word_t w;
        longint unsigned exp_t;
        w = u_mem.peek(key_t'(a));
        exp_t = (cnt_m.exists(key_t'(a)) ? cnt_m[key_t'(a)] : 0) + (cnt_s.exists(key_t'(a)) ? cnt_s[key_t'(a)] : 0);
        checks++;
        if (longint'(w[CTR_W-1:0]) + longint'(w[2*CTR_W-1:CTR_W]) != exp_t)
          fail($sformatf("word %0h holds %0d+%0d, expected %0d", a, w[CTR_W-1:0], w[2*CTR_W-1:CTR_W], exp_t));
        if (cnt_s.exists(key_t'(a)) && w[2*CTR_W-1:CTR_W] == 0) folded++;
      end
      checks++; if (folded == 0) fail("no shadow count was folded");
      $display("folded=%0d", folded);
    end
    checks++; if (n_snap != int'(WORDS)) fail($sformatf("snapshot delivered %0d words", n_snap));
    checks++; if (n_stall == 0) fail("no stall");
    checks++; if (n_c0 == 0) fail("no stage 0 conflation");
    checks++; if (n_c1 == 0) fail("no stage 1 conflation");
    checks++; if (n_rd == 0) fail("no read");
    checks++; if (n_held == 0) fail("no read held behind a write");
    checks++; if (n_sw == 0) fail("no kind switch");
    checks++; if (n_shadow == 0) fail("no shadow designation");
    $display("events=%0d stalls=%0d conf0=%0d conf1=%0d reads=%0d writes=%0d held=%0d switches=%0d shadow=%0d snap=%0d",
             n_ev, n_stall, n_c0, n_c1, n_rd, n_wr, n_held, n_sw, n_shadow, n_snap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
