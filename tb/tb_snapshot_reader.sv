// tb_snapshot_reader: checks the snapshot readout with WORDS=37.
//
// A small reply model returns, after a random delay but in order, a word
// derived from the read address (master = 3*addr+1, shadow = addr+7). The
// testbench checks that active rises on start, that no read is issued before
// flushed, that reads cover addresses 0..36 in order exactly once, that every
// result names the right key with the right master and shadow count, and
// that active falls only after the last result.
module tb_snapshot_reader;
  import cq_pkg::*;
  localparam int unsigned WORDS = 37;

  logic clk = 0, rst = 1, start = 0, active, flushed = 0, ready = 0;
  logic [MEM_LANES-1:0] cmd_valid, out_valid;
  mem_cmd_t [MEM_LANES-1:0] cmd;
  logic [2:0] rpl_n = 0;
  mem_word_t [MEM_LANES-1:0] rpl_data = '0;
  key_t [MEM_LANES-1:0] out_key;
  logic [MEM_LANES-1:0][CTR_W-1:0] out_master, out_shadow;

  snapshot_reader #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, next_rd = 0, n_out = 0;
  key_t pend[$];
  int   due[$];
  int   cyc = 0;

  task automatic fail(string msg);
    failures++; $display("FAIL %s at t=%0t", msg, $time);
  endtask

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (ready) for (int j = 0; j < MEM_LANES; j++) if (cmd_valid[j]) begin
      checks++;
      if (!flushed) fail("read before flushed");
      if (cmd[j].we || int'(cmd[j].addr) != next_rd) fail($sformatf("read %0d expected %0d", cmd[j].addr, next_rd));
      next_rd++;
      pend.push_back(cmd[j].addr); due.push_back(cyc + 3 + $urandom_range(4));
    end
    for (int j = 0; j < MEM_LANES; j++) if (out_valid[j]) begin
      checks++;
      if (out_key[j] != key_t'(n_out) || out_master[j] != CTR_W'(3 * n_out + 1) || out_shadow[j] != CTR_W'(n_out + 7))
        fail($sformatf("result %0d wrong", n_out));
      n_out++;
    end
  end

  // reply model, in order
  always @(negedge clk) begin
    int n;
    n = 0;
    rpl_data = '0;
    while (n < MEM_LANES && due.size() > 0 && due[0] <= cyc) begin
      key_t a;
      a = pend.pop_front(); void'(due.pop_front());
      rpl_data[n] = ctr_pack(CTR_W'(3 * a + 1), CTR_W'(a + 7));
      n++;
    end
    rpl_n = 3'(n);
    ready = ($urandom_range(3) != 0);
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++; if (!active) fail("active did not rise");
    repeat (20) @(negedge clk);
    flushed = 1;
    while (active) begin
      @(negedge clk);
      if (!active && n_out != int'(WORDS)) fail("active fell before the last result");
    end
    checks += 2;
    if (next_rd != int'(WORDS)) fail("not all words read");
    if (n_out != int'(WORDS)) fail("not all results delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
