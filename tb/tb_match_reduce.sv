// tb_match_reduce: checks that nomatch equals the NOR of the match flags
// exactly PIPE enabled cycles earlier, for a pipelined tree (N=50, PIPE=3)
// and a purely combinational one (N=7, PIPE=0), with random enables and
// sparse random match vectors (so that both outcomes occur).
module tb_match_reduce;
  logic clk = 0, rst = 1, en = 0;
  logic [49:0] m50;
  logic [6:0]  m7;
  logic nm50, nm7;

  match_reduce #(.N(50), .PIPE(3)) u_p (.clk, .rst, .en, .match(m50), .nomatch(nm50));
  match_reduce #(.N(7),  .PIPE(0)) u_c (.clk, .rst, .en, .match(m7),  .nomatch(nm7));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;
  logic hist [$];   // NOR of past enabled-cycle inputs, newest last

  always @(posedge clk) if (!rst && en) begin
    hist.push_back(~|m50);
    if (hist.size() > 3) void'(hist.pop_front());
  end

  always @(negedge clk) if (!rst) begin
    checks++;
    if (hist.size() == 3 && nm50 !== hist[0]) begin failures++; $display("FAIL pipelined at %0t", $time); end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m50 = '0; m7 = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (6000) begin
      @(negedge clk);
      en  = ($urandom_range(4) != 0);
      m50 = '0;
      if ($urandom_range(1)) m50[$urandom_range(49)] = 1'b1;
      m7  = ($urandom_range(1)) ? 7'(1 << $urandom_range(6)) : '0;
      #1;
      checks++;
      if (nm7 !== ~|m7) begin failures++; $display("FAIL combinational"); end
      if (m50 == 0) n_miss++; else n_hit++;
    end
    checks++;
    if (n_hit == 0 || n_miss == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
