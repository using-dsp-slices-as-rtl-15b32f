// counter_init: clears every counter word of the statistics memory.
//
// On a start pulse it writes the zero word to addresses 0..WORDS-1, four
// consecutive addresses per cycle on the four command lanes, whenever the
// arbiter grants it (ready). busy is high from the cycle after start until
// the last write has been granted. A start while busy is ignored.
//
// The paper names an initialization client of the arbiter; the sequential
// four-wide sweep is this design's choice. Memory user clock domain,
// synchronous reset.
module counter_init
  import cq_pkg::*;
#(
  parameter longint unsigned WORDS = 64'd1 << KEY_W   // counter words to clear
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  output logic                     busy,
  output logic     [MEM_LANES-1:0] cmd_valid,
  output mem_cmd_t [MEM_LANES-1:0] cmd,
  input  logic                     ready
);
  logic [KEY_W:0] addr;   // one bit wider than a key to reach WORDS

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      addr <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        addr <= '0;
      end
    end else if (ready) begin
      addr <= addr + (KEY_W+1)'(MEM_LANES);
      if (64'(addr) + 64'(MEM_LANES) >= WORDS) busy <= 1'b0;
    end
  end

  always_comb begin
    for (int unsigned j = 0; j < MEM_LANES; j++) begin
      cmd_valid[j]  = busy && (64'(addr) + 64'(j) < WORDS);
      cmd[j].we     = 1'b1;
      cmd[j].addr   = key_t'(addr + (KEY_W+1)'(j));
      cmd[j].wdata  = '0;
    end
  end

endmodule
