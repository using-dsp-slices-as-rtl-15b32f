// conflation_stage: one update conflation queue mapped onto a chain of DSP
// slices.
//
// The queue is a pipeline of N+1 cq_dsp_slice instances joined by their
// cascade (P -> PCIN) path. Slices 0..N-1 each hold one pending update in P
// and compare it with the newest input key; slice N only performs the delayed
// addition for the match found in slice N-1. Every cycle the contents shift
// by one slice, so an update admitted in slice 0 leaves at slice N after N+1
// enabled cycles.
//
// Each input word (valid, key, increment) is broadcast on in_word to the C
// registers of the matchers and to the A:B registers of all slices. When the
// key matches a pending slot i, slice i+1 adds the increment to that slot as
// it passes, and the NOR of all match flags (match_reduce) tells slice 0 to
// take an empty slot instead of the input: the update is conflated
// ("forward conflation": a new update is folded into the older pending one).
// An unmatched valid input is admitted into slice 0 and reported on
// admit_valid/admit_key; for the last stage of a cascade this is the memory
// read that opens a read-modify-write cycle. out_word is the slot leaving the
// queue (P of slice N).
//
// PIPE>0 inserts PIPE register levels into the match feedback and the same
// number of delay registers on the input path of slice 0 only. Keys inside
// those input delay registers cannot yet be matched, so identical valid keys
// must arrive at least PIPE+1 cycles apart; a preceding stage with N>=PIPE
// matchers guarantees this. With PIPE=0 the stage accepts any input stream
// and guarantees that a key leaving it is followed by at least N other keys or
// empty slots before the same key appears again.
//
// Interface and timing: all registers share the clock enable en. In every
// enabled cycle in_word is taken in, out_word is handed on (valid or not),
// and admit_valid/conflated report what slice 0 did with the word that
// entered PIPE+2 enabled cycles earlier. Reset empties the queue.
//
// Slice N has no comparator, so its q output is unused.
//
// The structure follows the paper's DSP mapping figure and text; the common
// enable and reset are this design's choices. The paper also splits a deep
// queue into segments of up to 42 comparators for placement on several DSP
// columns; that is a placement measure and not modelled here.
module conflation_stage
  import cq_pkg::*;
#(
  parameter int unsigned N     = 244,  // matcher slices
  parameter int unsigned PIPE  = 6,    // pipeline stages in the match feedback
  parameter int unsigned FANIN = 6     // reduction tree fan-in per level
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     en,
  input  dp_word_t in_word,      // incoming slot (valid flag inside)
  output dp_word_t out_word,     // slot leaving the queue
  output logic     admit_valid,  // a valid unmatched update enters slice 0
  output key_t     admit_key,
  output logic     conflated     // a valid update was merged into a pending one
);

  dp_word_t     pc    [N+1];
  dp_word_t     abq   [N+1];
  logic [N:0]   q;
  logic         nomatch;
  dp_word_t     dly   [PIPE+1];

  // Input delay of slice 0, matching the pipelined feedback.
  assign dly[0] = in_word;
  for (genvar d = 0; d < PIPE; d++) begin : g_dly
    always_ff @(posedge clk) begin
      if (rst)     dly[d+1] <= '0;
      else if (en) dly[d+1] <= dly[d];
    end
  end

  for (genvar i = 0; i <= N; i++) begin : g_slice
    cq_dsp_slice #(
      .FIRST   (i == 0),
      .HAS_CMP (i < N)
    ) u_slice (
      .clk    (clk),
      .rst    (rst),
      .en     (en),
      .ab_in  ((i == 0) ? dly[PIPE] : in_word),
      .c_in   (in_word),
      .pcin   ((i == 0) ? dp_word_t'('0) : pc[(i == 0) ? 0 : i-1]),
      .sel    ((i == 0) ? nomatch : q[(i == 0) ? 0 : i-1]),
      .pcout  (pc[i]),
      .abcout (abq[i]),
      .q      (q[i])
    );
  end

  match_reduce #(
    .N     (N),
    .PIPE  (PIPE),
    .FANIN (FANIN)
  ) u_reduce (
    .clk     (clk),
    .rst     (rst),
    .en      (en),
    .match   (q[N-1:0]),
    .nomatch (nomatch)
  );

  assign out_word    = pc[N];
  assign admit_valid = en && dp_valid(abq[0]) && nomatch;
  assign admit_key   = dp_key(abq[0]);
  assign conflated   = en && dp_valid(abq[0]) && !nomatch;

endmodule
