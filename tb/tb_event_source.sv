// tb_event_source: checks the event keys against the Galois LFSR update
// written out bit by bit, that the state only advances when an event is taken
// (enable && ready), that out_valid follows enable, that the key mask
// applies, and that no key repeats among the events taken with a wide mask.
module tb_event_source;
  import cq_pkg::*;
  logic clk = 0, rst = 1, enable = 0, ready = 0;
  key_t key_mask = '1;
  logic out_valid;
  key_t out_key;

  event_source #(.SEED(32'hACE1_0001)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] s = 32'hACE1_0001;
  bit seen [key_t];
  int repeats = 0;

  function automatic logic [31:0] step(logic [31:0] x);
    logic [31:0] y;
    // feedback bit x[0] enters at bit 31 and is XORed into taps 21, 1 and 0
    for (int i = 0; i < 31; i++) y[i] = x[i+1];
    y[31] = x[0];
    y[21] = x[22] ^ x[0];
    y[1]  = x[2] ^ x[0];
    y[0]  = x[1] ^ x[0];
    return y;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      enable = ($urandom_range(7) != 0);
      ready  = ($urandom_range(3) != 0);
      key_mask = (n < 3000) ? key_t'('1) : key_t'(12'hF0F);
      #1;
      checks += 2;
      if (out_valid !== enable) failures++;
      if (out_key !== (s[KEY_W-1:0] & key_mask)) begin
        failures++; $display("FAIL key %h exp %h", out_key, s[KEY_W-1:0] & key_mask);
      end
      if (enable && ready) begin
        if (n < 3000) begin
          if (seen.exists(out_key)) repeats++;
          seen[out_key] = 1;
        end
        s = step(s);
      end
    end
    checks++;
    if (repeats != 0) begin failures++; $display("FAIL %0d repeated keys", repeats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
