// tb_rmw_scheduler: checks the read-modify-write scheduler against the
// behavioural memory controller.
//
// A driver in the fast clock domain plays the conflation queue: it opens a
// read-modify-write cycle for a key that has none open (rd_valid) and closes
// it 25 enabled cycles later with a random increment (wr_valid), the same
// order as the real queue, and it stalls while req_full is high. Counters
// start from random values. The testbench checks:
//   * every read is issued only after all writes requested before it,
//   * all commands of a cycle are of one kind and packed from lane 0,
//   * each stored word ends as start value plus all increments (master plus
//     shadow), with the shadow folded away for keys written while no
//     snapshot is active,
//   * master_flushed rises after a lane switch and not before every write
//     requested before the switch has been issued,
//   * backpressure, a held read and a kind switch all occur.
module tb_rmw_scheduler;
  import cq_pkg::*;

  localparam int unsigned K = 12;

  logic clk = 0, mclk = 0, rst = 1, mrst = 1;
  logic rd_valid = 0, wr_valid = 0;
  key_t rd_key = '0, wr_key = '0;
  inc_t wr_inc = '0;
  logic req_full, en, lane_shadow = 0, snap_active = 0, master_flushed;
  logic      [MEM_LANES-1:0] cmd_valid, rd_valid_m;
  mem_cmd_t  [MEM_LANES-1:0] cmd;
  logic                      cmd_ready;
  logic      [2:0]           rpl_n;
  mem_word_t [MEM_LANES-1:0] rpl_data;
  logic read_held, kind_switch;

  assign en = !req_full;

  rmw_scheduler #(.REQ_DEPTH(16), .REPLY_DEPTH(32), .GROUP(16), .PIPE_DEPTH(30)) dut (
    .clk, .rst, .rd_valid, .rd_key, .wr_valid, .wr_key, .wr_inc, .req_full, .en, .lane_shadow,
    .mclk, .mrst, .snap_active, .master_flushed, .cmd_valid, .cmd, .cmd_ready, .rpl_n, .rpl_data,
    .read_held, .kind_switch
  );

  mem_ctrl_model #(.LAT(10), .JITTER(3), .READY_PCT(80)) u_mem (
    .clk (mclk), .rst (mrst), .cmd_valid, .cmd, .ready (cmd_ready),
    .rd_valid (rd_valid_m), .rd_data (rpl_data)
  );
  assign rpl_n = 3'($countones(rd_valid_m));

  always #4  clk  = ~clk;
  always #11 mclk = ~mclk;

  int checks = 0, failures = 0;
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at t=%0t", msg, $time);
  endtask

  longint unsigned exp_tot [key_t];
  bit   open_k [key_t];
  key_t oq_key[$];
  int   oq_due[$];
  int   ecyc = 0, n_wr_req = 0, n_full = 0;
  int   rd_need[$];            // writes requested before each read
  int   wr_issued = 0, n_held = 0, n_sw = 0;
  int   wr_at_switch = -1;
  bit   flushed_seen = 0;
  bit   drive_on = 0;

  // fast-domain driver
  always @(negedge clk) if (!rst) begin
    rd_valid = 0; wr_valid = 0;
    if (req_full) n_full++;
    else begin
      if (oq_due.size() > 0 && oq_due[0] <= ecyc) begin
        wr_valid = 1;
        wr_key = oq_key.pop_front(); void'(oq_due.pop_front());
        wr_inc = inc_t'({CNT_W'($urandom_range(99)), CNT_W'($urandom_range(99))});
        open_k[wr_key] = 0;
        exp_tot[wr_key] += wr_inc[CNT_W-1:0] + wr_inc[INC_W-1:CNT_W];
        n_wr_req++;
      end
      if (drive_on && $urandom_range(9) < 8) begin
        key_t k;
        k = key_t'($urandom_range(K-1));
        if (!(open_k.exists(k) && open_k[k])) begin
          rd_valid = 1; rd_key = k;
          open_k[k] = 1;
          oq_key.push_back(k); oq_due.push_back(ecyc + 25);
          rd_need.push_back(n_wr_req);
        end
      end
      ecyc++;
    end
  end


  // memory-side monitor
  always @(posedge mclk) if (!mrst) begin
    if (read_held) n_held++;
    if (kind_switch) n_sw++;
    if (cmd_ready && |cmd_valid) begin
      checks++;
      for (int j = 1; j < MEM_LANES; j++) begin
        if (cmd_valid[j] && !cmd_valid[j-1]) fail("lanes not packed");
        if (cmd_valid[j] && cmd[j].we != cmd[0].we) fail("mixed kinds in one cycle");
      end
      for (int j = 0; j < MEM_LANES; j++) if (cmd_valid[j]) begin
        if (cmd[j].we) wr_issued++;
        else begin
          checks++;
          if (rd_need.size() == 0) fail("unexpected read");
          else if (wr_issued < rd_need.pop_front()) fail("read overtook an older write");
        end
      end
    end
    if (master_flushed && !flushed_seen) begin
      flushed_seen = 1;
      checks++;
      if (wr_issued < wr_at_switch) fail("master_flushed before the older writes were issued");
    end
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < K; k++) begin
      logic [CTR_W-1:0] m, s;
      m = CTR_W'($urandom_range(1000)); s = CTR_W'($urandom_range(1000));
      u_mem.store[key_t'(k)] = ctr_pack(m, s);
      exp_tot[key_t'(k)] = m + s;
    end
    repeat (4) @(posedge mclk);
    @(negedge mclk); rst = 0; mrst = 0;
    drive_on = 1;
    repeat (3000) @(negedge clk);
    // snapshot-like phase: shadow lane, no folding
    @(negedge mclk) snap_active = 1;
    @(negedge clk)  begin lane_shadow = 1; wr_at_switch = n_wr_req; end
    repeat (3000) @(negedge clk);
    checks++; if (!flushed_seen) fail("master_flushed never rose");
    @(negedge mclk) snap_active = 0;
    @(negedge clk)  lane_shadow = 0;
    repeat (3000) @(negedge clk);
    drive_on = 0;
    repeat (600) @(negedge mclk);
    checks++; if (oq_key.size() != 0) fail("open cycles left");
    for (int k = 0; k < K; k++) begin
      mem_word_t w;
      w = u_mem.peek(key_t'(k));
      checks += 2;
      if (longint'(w[CTR_W-1:0]) + longint'(w[2*CTR_W-1:CTR_W]) != exp_tot[key_t'(k)])
        fail($sformatf("key %0d total %0d+%0d expected %0d", k, w[CTR_W-1:0], w[2*CTR_W-1:CTR_W], exp_tot[key_t'(k)]));
      if (w[2*CTR_W-1:CTR_W] != 0) fail($sformatf("key %0d shadow not folded", k));
    end
    checks++; if (n_full == 0) fail("no backpressure");
    checks++; if (n_held == 0) fail("no held read");
    checks++; if (n_sw == 0)   fail("no kind switch");
    $display("writes=%0d full=%0d held=%0d switches=%0d", n_wr_req, n_full, n_held, n_sw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
