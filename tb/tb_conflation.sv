// tb_conflation: self-checking test of the two-stage conflation with the
// paper's first stage (6 matchers, combinational feedback) and a deep stage
// of N1=40 matchers (reduced from 244 for simulation time) with the paper's
// six feedback pipeline stages.
//
// The scoreboard models the memory side as a per-key "open read-modify-write
// cycle" set and checks:
//   * every read (rd_valid) is for a key without an open cycle, and every
//     valid input update whose key has no open cycle eventually opens one,
//   * writes come in the order of the reads, N1+1 enabled cycles after them,
//   * per key, the written increments add up to the input increments, lane by
//     lane, after draining,
//   * both stages conflate at least once and the pipeline stalls at least once.
module tb_conflation;
  import cq_pkg::*;

  localparam int unsigned N1 = 40;
  localparam int unsigned KEYS = 24;

  logic clk = 0, rst = 1, en = 0;
  logic in_valid = 0;
  key_t in_key = '0;
  inc_t in_inc = '0;
  logic rd_valid, wr_valid, conflated0, conflated1;
  key_t rd_key, wr_key;
  inc_t wr_inc;

  conflation #(.N1(N1)) dut (
    .clk, .rst, .en, .in_valid, .in_key, .in_inc,
    .rd_valid, .rd_key, .wr_valid, .wr_key, .wr_inc, .conflated0, .conflated1
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned in_m [key_t], in_s [key_t], out_m [key_t], out_s [key_t];
  key_t rd_q[$];
  int   rd_t[$];
  bit   open_c [key_t];
  int   ecycle = 0, n_c0 = 0, n_c1 = 0, n_rd = 0, n_stall = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s at t=%0t", msg, $time);
  endtask

  always @(posedge clk) if (!rst && en) begin
    if (wr_valid) begin
      checks++;
      if (rd_q.size() == 0 || rd_q[0] != wr_key) fail("write out of read order");
      else begin
        checks++;
        if (ecycle - rd_t[0] != int'(N1) + 1) fail($sformatf("rmw window %0d", ecycle - rd_t[0]));
        void'(rd_q.pop_front()); void'(rd_t.pop_front());
      end
      open_c[wr_key] = 1'b0;
      out_m[wr_key] += wr_inc[CNT_W-1:0];
      out_s[wr_key] += wr_inc[INC_W-1:CNT_W];
    end
    if (rd_valid) begin
      checks++;
      if (open_c.exists(rd_key) && open_c[rd_key]) fail($sformatf("read of key %0h with an open cycle", rd_key));
      open_c[rd_key] = 1'b1;
      rd_q.push_back(rd_key); rd_t.push_back(ecycle);
      n_rd++;
    end
    if (conflated0) n_c0++;
    if (conflated1) n_c1++;
    ecycle++;
  end

  task automatic drive(int cycles, int gap_pct, int stall_pct);
    repeat (cycles) begin
      @(negedge clk);
      en = ($urandom_range(99) >= stall_pct);
      if (!en) n_stall++;
      in_valid = ($urandom_range(99) >= gap_pct);
      in_key = key_t'($urandom_range(KEYS-1) * 40503);
      in_inc = $urandom_range(1) ? inc_t'(1) : inc_t'(1 << CNT_W);  // master or shadow
      if (en && in_valid) begin
        in_m[in_key] += in_inc[CNT_W-1:0];
        in_s[in_key] += in_inc[INC_W-1:CNT_W];
      end
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    drive(4000, 10, 5);
    drive(2000, 60, 0);
    drive(4000, 0, 25);
    @(negedge clk); in_valid = 0; en = 1;
    repeat (2 * N1 + 40) @(negedge clk);
    checks++;
    if (rd_q.size() != 0) fail("open read-modify-write cycles after drain");
    foreach (in_m[k]) begin
      checks++;
      if (!out_m.exists(k) || out_m[k] != in_m[k] || out_s[k] != in_s[k])
        fail($sformatf("key %0h: in %0d/%0d", k, in_m[k], in_s[k]));
    end
    checks++; if (n_c0 == 0) fail("stage 0 never conflated");
    checks++; if (n_c1 == 0) fail("stage 1 never conflated");
    checks++; if (n_stall == 0) fail("pipeline never stalled");
    $display("reads=%0d conflations stage0=%0d stage1=%0d stalls=%0d", n_rd, n_c0, n_c1, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
