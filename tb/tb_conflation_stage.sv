// tb_conflation_stage: self-checking test of one conflation queue with a
// combinational match feedback (PIPE=0), reduced to N=8 matchers.
//
// A random stream of updates over a small key space (so that keys repeat
// often) with random gaps and random stalls is fed in. A scoreboard, written
// independently of the RTL, checks:
//   * per key, the sum of all input increments equals the sum of all output
//     increments after the queue has drained (no update lost or doubled),
//   * an update is admitted (memory read) only when no slot of the same key
//     is pending, and is never refused when none is pending,
//   * slots leave in admission order, exactly N+1 enabled cycles after
//     admission,
//   * two valid output slots with the same key have at least N other slots
//     between them,
//   * a conflation happens and an admission happens (mechanism coverage).
module tb_conflation_stage;
  import cq_pkg::*;

  localparam int unsigned N = 8;
  localparam int unsigned KEYS = 12;

  logic clk = 0, rst = 1, en = 0;
  dp_word_t in_word, out_word;
  logic admit_valid, conflated;
  key_t admit_key;

  conflation_stage #(.N(N), .PIPE(0)) dut (
    .clk, .rst, .en, .in_word, .out_word, .admit_valid, .admit_key, .conflated
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned in_sum  [key_t];
  longint unsigned out_sum [key_t];
  key_t  pend_q[$];          // admitted, not yet output, in order
  int    pend_t[$];          // enabled-cycle number of admission
  int    pend_cnt [key_t];   // pending slots per key
  int    ecycle = 0;         // count of enabled cycles
  int    last_pos [key_t];   // output position of the last valid slot per key
  int    n_conf = 0, n_admit = 0, n_stall = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s at t=%0t", msg, $time);
  endtask

  // Scoreboard, sampled at each rising edge before the registers update.
  always @(posedge clk) if (!rst && en) begin
    // 1) slot leaving the queue
    if (dp_valid(out_word)) begin
      key_t k;
      k = dp_key(out_word);
      checks++;
      if (pend_q.size() == 0 || pend_q[0] != k) fail("output out of admission order");
      else begin
        checks++;
        if (ecycle - pend_t[0] != int'(N) + 1) fail($sformatf("latency %0d", ecycle - pend_t[0]));
        void'(pend_q.pop_front()); void'(pend_t.pop_front());
        pend_cnt[k]--;
      end
      out_sum[k] += dp_inc(out_word)[CNT_W-1:0] + (dp_inc(out_word) >> CNT_W);
      if (last_pos.exists(k)) begin
        checks++;
        if (ecycle - last_pos[k] < int'(N) + 1) fail($sformatf("spacing %0d", ecycle - last_pos[k]));
      end
      last_pos[k] = ecycle;
    end
    // 2) admission decision of slice 0
    if (admit_valid || conflated) begin
      key_t k;
      bit pending;
      k = admit_key;
      pending = pend_cnt.exists(k) && pend_cnt[k] > 0;
      checks++;
      if (admit_valid && pending)   fail("admitted a key that is pending (hazard)");
      if (conflated && !pending)    fail("conflated a key with nothing pending");
      if (admit_valid) begin
        pend_q.push_back(k); pend_t.push_back(ecycle);
        pend_cnt[k] = pending ? pend_cnt[k] + 1 : 1;
        n_admit++;
      end
      if (conflated) n_conf++;
    end
    ecycle++;
  end

  task automatic drive(int cycles, int gap_pct, int stall_pct);
    repeat (cycles) begin
      @(negedge clk);
      en = ($urandom_range(99) >= stall_pct);
      if (!en) n_stall++;
      if ($urandom_range(99) >= gap_pct) begin
        key_t k = key_t'($urandom_range(KEYS-1) * 977);
        inc_t v = inc_t'({CNT_W'($urandom_range(3)), CNT_W'($urandom_range(3))});
        in_word = dp_pack(1'b1, k, v);
      end else in_word = '0;
      // Account the input once, when it is taken in.
      if (en && dp_valid(in_word))
        in_sum[dp_key(in_word)] += dp_inc(in_word)[CNT_W-1:0] + (dp_inc(in_word) >> CNT_W);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_word = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    drive(3000, 20, 10);   // dense stream with stalls
    drive(2000, 70, 0);    // sparse stream
    drive(3000, 0, 30);    // back-to-back with heavy stalling
    // drain with empty input
    @(negedge clk); in_word = '0; en = 1;
    repeat (3 * N + 10) @(negedge clk);
    checks++;
    if (pend_q.size() != 0) fail("queue did not drain");
    foreach (in_sum[k]) begin
      checks++;
      if (!out_sum.exists(k) || out_sum[k] != in_sum[k])
        fail($sformatf("key %0h: in %0d out %0d", k, in_sum[k], out_sum.exists(k) ? out_sum[k] : 0));
    end
    checks++; if (n_conf == 0)  fail("no conflation happened");
    checks++; if (n_admit == 0) fail("no admission happened");
    $display("admissions=%0d conflations=%0d stalls=%0d", n_admit, n_conf, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
