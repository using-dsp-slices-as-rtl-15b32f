// tb_counter_init: checks the counter initialization with WORDS=101 (not a
// multiple of the four lanes) and a randomly stalling grant. Every address
// below WORDS must be written with zero exactly once, no other address and
// no read may appear, busy must rise after start and fall right after the
// last grant, and with an always-ready grant the sweep must take
// ceil(WORDS/4) cycles. A start while busy must not restart the sweep.
module tb_counter_init;
  import cq_pkg::*;
  localparam int unsigned WORDS = 101;

  logic clk = 0, rst = 1, start = 0, busy, ready = 0;
  logic [MEM_LANES-1:0] cmd_valid;
  mem_cmd_t [MEM_LANES-1:0] cmd;

  counter_init #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int hits [int];
  bit always_ready = 0;

  always @(posedge clk) if (!rst && ready) begin
    for (int j = 0; j < MEM_LANES; j++) if (cmd_valid[j]) begin
      checks++;
      if (!cmd[j].we || cmd[j].wdata != '0 || cmd[j].addr >= WORDS) begin
        failures++; $display("FAIL bad command %0d", cmd[j].addr);
      end
      hits[int'(cmd[j].addr)] = hits.exists(int'(cmd[j].addr)) ? hits[int'(cmd[j].addr)] + 1 : 1;
    end
  end

  always @(negedge clk) ready = always_ready || ($urandom_range(2) != 0);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep(bit fast);
    int cyc;
    hits.delete();
    always_ready = fast;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++; if (!busy) begin failures++; $display("FAIL busy did not rise"); end
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
      if (cyc == 3) start = 1;        // ignored while busy
      if (cyc == 4) start = 0;
    end
    for (int a = 0; a < int'(WORDS); a++) begin
      checks++;
      if (!hits.exists(a) || hits[a] != 1) begin failures++; $display("FAIL address %0d written %0d times", a, hits.exists(a) ? hits[a] : 0); end
    end
    if (fast) begin
      checks++;
      if (cyc != (int'(WORDS) + 3) / 4) begin failures++; $display("FAIL sweep took %0d cycles", cyc); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (3) @(negedge clk);
    checks++; if (busy || |cmd_valid) begin failures++; $display("FAIL active before start"); end
    sweep(0);
    sweep(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
