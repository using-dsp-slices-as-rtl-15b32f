// mp_fifo: synchronous FIFO that accepts up to P words and delivers up to P
// words per cycle.
//
// Storage is a circular array of DEPTH words (a power of two) with binary
// read and write pointers one bit wider than the index. Pushes are given as a
// count (push_n) of the leading words of push_data; pops as a count (pop_n)
// of the leading words shown on pop_data. pop_data[j] is the j-th oldest
// word and is meaningful for j < count. space is the number of free places.
// The caller must keep push_n <= space and pop_n <= count; assertions check
// both. Reset empties the FIFO. Used by the memory-side scheduler and
// arbiter, whose four command lanes move up to four words per cycle; the FIFO
// itself is this design's helper and not described in the paper.
module mp_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned P     = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [$clog2(P+1)-1:0]     push_n,
  input  logic [P-1:0][W-1:0]        push_data,
  input  logic [$clog2(P+1)-1:0]     pop_n,
  output logic [P-1:0][W-1:0]        pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] space
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign count = ($clog2(DEPTH+1))'(wptr - rptr);
  assign space = ($clog2(DEPTH+1))'(DEPTH) - count;

  always_comb begin
    for (int unsigned j = 0; j < P; j++)
      pop_data[j] = mem[AW'(rptr + (AW+1)'(j))];
  end

  always_ff @(posedge clk) begin
    for (int unsigned j = 0; j < P; j++)
      if (j < push_n) mem[AW'(wptr + (AW+1)'(j))] <= push_data[j];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      wptr <= wptr + (AW+1)'(push_n);
      rptr <= rptr + (AW+1)'(pop_n);
    end
  end

  a_push: assert property (@(posedge clk) disable iff (rst) $clog2(DEPTH+1)'(push_n) <= space);
  a_pop:  assert property (@(posedge clk) disable iff (rst) $clog2(DEPTH+1)'(pop_n) <= count);

endmodule
