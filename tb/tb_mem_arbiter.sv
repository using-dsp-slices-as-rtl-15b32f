// tb_mem_arbiter: checks priority and reply routing of the memory arbiter.
//
// Three random sources (initialization writes, scheduler reads and writes,
// snapshot reads) offer bundles of up to four commands and hold them until
// granted. Memory words are preloaded with a value derived from their
// address, so a reply identifies the address it was read from. Checks:
//   * the granted source is the highest-priority one that offers commands
//     (init > scheduler > snapshot), and the controller sees exactly its
//     bundle,
//   * each source receives replies only for its own reads, in its own read
//     order, with the right data,
//   * all reads are answered, and every source is granted at least once.
module tb_mem_arbiter;
  import cq_pkg::*;

  logic clk = 0, rst = 1;
  logic [3:0] iv = 0, sv = 0, pv = 0;
  mem_cmd_t [3:0] ic, sc, pc;
  logic ir, sr, pr;
  logic [2:0] s_n, p_n;
  mem_word_t [3:0] s_d, p_d;
  logic [3:0] mv, rv;
  mem_cmd_t [3:0] mc;
  logic mready;
  mem_word_t [3:0] rd;

  mem_arbiter #(.OWN_DEPTH(64)) dut (
    .clk, .rst,
    .init_valid(iv), .init_cmd(ic), .init_ready(ir),
    .sch_valid(sv), .sch_cmd(sc), .sch_ready(sr), .sch_rpl_n(s_n), .sch_rpl_data(s_d),
    .snap_valid(pv), .snap_cmd(pc), .snap_ready(pr), .snap_rpl_n(p_n), .snap_rpl_data(p_d),
    .mc_cmd_valid(mv), .mc_cmd(mc), .mc_ready(mready), .mc_rd_valid(rv), .mc_rd_data(rd)
  );

  mem_ctrl_model #(.LAT(6), .JITTER(3), .READY_PCT(80)) u_mem (
    .clk, .rst, .cmd_valid(mv), .cmd(mc), .ready(mready), .rd_valid(rv), .rd_data(rd));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, g_i = 0, g_s = 0, g_p = 0;
  bit force_idle = 0;
  key_t s_exp[$], p_exp[$];
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s at t=%0t", msg, $time);
  endtask

  function automatic mem_word_t pattern(key_t a);
    return mem_word_t'({a, 8'h5A, a, 16'hC0DE});
  endfunction

  function automatic mem_cmd_t [3:0] rand_bundle(logic [3:0] v, bit reads, bit writes);
    mem_cmd_t [3:0] b;
    for (int j = 0; j < 4; j++) begin
      b[j].addr  = key_t'($urandom_range(63));
      b[j].we    = writes && (!reads || $urandom_range(1));
      b[j].wdata = pattern(b[j].addr);
    end
    return b;
  endfunction

  function automatic logic [3:0] rand_valid();
    case ($urandom_range(3))
      0: return 4'b0001;  1: return 4'b0011;  2: return 4'b0111;  default: return 4'b1111;
    endcase
  endfunction

  // check the grant and record reads, at the edge where they are taken
  always @(posedge clk) if (!rst) begin
    if (mready && (|iv || |sv || |pv)) begin
      checks++;
      if (|iv) begin
        if (!ir || sr || pr || mv != iv) fail("init not granted first");
        g_i++;
      end else if (|sv) begin
        if (!sr || pr || mv != sv) fail("scheduler not granted before snapshot");
        g_s++;
        for (int j = 0; j < 4; j++) if (sv[j] && !sc[j].we) s_exp.push_back(sc[j].addr);
      end else begin
        if (!pr || mv != pv) fail("snapshot not granted");
        g_p++;
        for (int j = 0; j < 4; j++) if (pv[j]) p_exp.push_back(pc[j].addr);
      end
    end
    for (int j = 0; j < 4; j++) begin
      if (j < s_n) begin
        checks++;
        if (s_exp.size() == 0) fail("stray scheduler reply");
        else if (s_d[j] != pattern(s_exp.pop_front())) fail("scheduler reply data/order");
      end
      if (j < p_n) begin
        checks++;
        if (p_exp.size() == 0) fail("stray snapshot reply");
        else if (p_d[j] != pattern(p_exp.pop_front())) fail("snapshot reply data/order");
      end
    end
  end

  // sources: present a bundle, hold it until granted
  always @(negedge clk) if (force_idle) begin
    iv = '0; sv = '0; pv = '0;
  end else if (!rst) begin
    if (ir || !(|iv)) begin iv = ($urandom_range(9) == 0) ? rand_valid() : '0; ic = rand_bundle(iv, 0, 1); end
    if (sr || !(|sv)) begin sv = ($urandom_range(9) < 5) ? rand_valid() : '0; sc = rand_bundle(sv, 1, 1); end
    if (pr || !(|pv)) begin pv = ($urandom_range(9) < 6) ? rand_valid() : '0; pc = rand_bundle(pv, 1, 0); end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) u_mem.store[key_t'(a)] = pattern(key_t'(a));
    ic = '0; sc = '0; pc = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (5000) @(posedge clk);
    @(negedge clk) force_idle = 1;
    repeat (50) @(posedge clk);
    checks += 2;
    if (s_exp.size() != 0 || p_exp.size() != 0) fail("reads left unanswered");
    if (g_i == 0 || g_s == 0 || g_p == 0) fail("a source was never granted");
    $display("grants init=%0d sched=%0d snap=%0d", g_i, g_s, g_p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
