// event_source: trivial pseudo-random event generator for the tracker.
//
// A 32-bit Galois LFSR (taps x^32+x^22+x^2+x+1) advances in every cycle in
// which an event is taken (enable && ready). The event key is the low KEY_W
// bits of the LFSR state ANDed with key_mask; a narrow mask confines the
// events to few keys and so produces the key locality that makes updates
// conflate. out_valid equals enable. Synchronous reset loads SEED.
//
// The paper only says that the event source is a trivial pseudo-random one;
// the LFSR and the key mask are this design's choices.
module event_source
  import cq_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic clk,
  input  logic rst,
  input  logic enable,
  input  key_t key_mask,
  input  logic ready,
  output logic out_valid,
  output key_t out_key
);
  logic [31:0] lfsr;

  always_ff @(posedge clk) begin
    if (rst)                  lfsr <= SEED;
    else if (enable && ready) lfsr <= (lfsr >> 1) ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
  end

  assign out_valid = enable;
  assign out_key   = lfsr[KEY_W-1:0] & key_mask;

endmodule
