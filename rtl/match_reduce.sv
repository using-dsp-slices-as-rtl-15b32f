// match_reduce: aggregation of the per-slice match flags of a conflation
// queue into the "no match anywhere" admission signal.
//
// The N match flags (the registered Q outputs of the matcher slices) are
// ORed and inverted, which is the NOR gate of the basic queue. For a deep
// queue the NOR becomes a tree: each of the PIPE register levels ORs groups
// of FANIN signals of the level below (FANIN=6 is the input count of one
// FPGA LUT). Once a level has reduced the flags to a single one, the remaining
// levels only delay it. If PIPE levels are not enough to reach a single flag,
// the rest is ORed combinationally at the output; with PIPE=0 the whole NOR is
// combinational.
//
// Timing: nomatch(t) = ~|match(t-PIPE) counted in enabled cycles; the
// registers hold while en is low, so the feedback path stalls together with
// the queue it belongs to. Reset clears the levels (no match pending).
//
// With PIPE=0 (stage 0 of the schedule) there are no registers, so clk, rst
// and en are unused in that instance; they are kept for a uniform interface.
//
// The paper pipelines the match reduction with as many register stages as the
// first slice's input path is delayed; the tree shape (groups of FANIN) is
// this design's choice.
module match_reduce #(
  parameter int unsigned N     = 244,  // number of match flags
  parameter int unsigned PIPE  = 6,    // register levels in the feedback path
  parameter int unsigned FANIN = 6     // flags combined per node and level
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [N-1:0] match,
  output logic         nomatch
);

  // lvl[0] is the input; lvl[l] for l>0 is the register level l. Unused
  // upper bits stay zero, so a uniform grouping works at every level.
  logic [N-1:0] lvl [PIPE+1];

  function automatic logic [N-1:0] reduce_level(logic [N-1:0] x);
    logic [N-1:0] r;
    r = '0;
    for (int unsigned j = 0; j < N; j++) begin
      for (int unsigned b = 0; b < FANIN; b++) begin
        if (j * FANIN + b < N) r[j] = r[j] | x[j*FANIN+b];
      end
    end
    return r;
  endfunction

  assign lvl[0] = match;

  for (genvar l = 0; l < PIPE; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      if (rst)     lvl[l+1] <= '0;
      else if (en) lvl[l+1] <= reduce_level(lvl[l]);
    end
  end

  assign nomatch = ~|lvl[PIPE];

endmodule
