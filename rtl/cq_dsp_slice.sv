// cq_dsp_slice: one DSP slice of an update conflation queue.
//
// The slice is written as the subset of a DSP48E2 that the conflation mapping
// uses, with the multiplier unused:
//   * a two-deep A:B input register (ab1, ab2) that loads the broadcast
//     key-value input bus,
//   * a C register that loads the same bus and holds the key to be matched,
//   * a 2:1 MUX in front of the adder, selecting the delayed A:B word (sel=1)
//     or zero (sel=0),
//   * the adder, which adds the MUX output to the cascade input PCIN (or to
//     zero in the first slice of a queue),
//   * the P register, whose output is the cascade output PCOUT to the next
//     slice (the second A:B register is visible as ABCOUT, as on the A:B
//     cascade of a DSP slice), and
//   * a comparator of the adder output against C over the valid flag and key
//     (a masked pattern detector), registered into Q together with P.
//
// Timing: a word presented on ab_in/c_in in cycle t is compared in cycle t+1
// against the slot being written to P, so Q(t+2) tells whether the key
// present in P at t+2 equals it. At t+2 the same word sits in ab2, so the
// following slice can merge its increment while the matched slot moves on:
// the addition happens one stage after the comparison, as the registered
// comparator of a DSP slice forces.
//
// In the first slice (FIRST=1) the A:B path carries the full key-value word,
// and sel is the "no match anywhere" signal: a matched input is replaced by
// an empty slot (all zero, valid flag clear). In every later slice the A:B path
// carries only the increment lanes and sel is the previous slice's Q. The
// last slice of a queue has no comparator (HAS_CMP=0); it performs only the
// delayed addition for the last matcher.
//
// en is the common clock enable of all registers (the DSP CE pins); the whole
// queue stalls together. Reset clears all registers, so the queue starts
// filled with empty slots. The register structure follows the paper's DSP
// mapping; reset and the common enable are this design's choices.
module cq_dsp_slice
  import cq_pkg::*;
#(
  parameter bit FIRST   = 1'b0,  // first slice of a queue: no PCIN, full word on A:B
  parameter bit HAS_CMP = 1'b1   // slice carries a matcher
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     en,
  input  dp_word_t ab_in,   // broadcast key-value input bus (A:B)
  input  dp_word_t c_in,    // broadcast key input bus (C)
  input  dp_word_t pcin,    // cascade input from the previous slice's P
  input  logic     sel,     // MUX control: 1 = delayed A:B word, 0 = zero
  output dp_word_t pcout,   // P register
  output dp_word_t abcout,  // second A:B register (the A:B cascade output)
  output logic     q        // registered match of P against the C key
);

  dp_word_t ab1, ab2, c_reg, p_reg;
  dp_word_t mux_o, sum;
  logic     q_reg;

  // Later slices receive only the increment lanes on A:B.
  localparam dp_word_t AB_MASK = FIRST ? '1 : dp_word_t'((DP_W'(1) << INC_W) - 1);

  always_comb begin
    mux_o = sel ? ab2 : '0;
    sum   = mux_o + (FIRST ? '0 : pcin);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ab1   <= '0;
      ab2   <= '0;
      c_reg <= '0;
      p_reg <= '0;
      q_reg <= 1'b0;
    end else if (en) begin
      ab1   <= ab_in & AB_MASK;
      ab2   <= ab1;
      c_reg <= c_in & TAG_MASK;
      p_reg <= sum;
      q_reg <= HAS_CMP && (((sum ^ c_reg) & TAG_MASK) == '0);
    end
  end

  assign pcout  = p_reg;
  assign abcout = ab2;
  assign q     = q_reg;

endmodule
