// conflation: the two-stage "0-6-250" update conflation of the event tracker.
//
// Stage 0 is a short queue of N0=6 matchers whose match feedback is a purely
// combinational NOR (PIPE0=0). It accepts any update stream and guarantees
// that two equal keys leaving it are separated by at least 6 other slots.
// That spacing allows stage 1, the deep queue of N1=244 matchers, to carry
// PIPE1=6 register levels in its match reduction and the same delay on its
// first slice's input. Only the last stage decides about memory traffic:
//   * an update admitted into stage 1 (its key is pending nowhere in stage 1)
//     issues a memory read of its counter (rd_valid, rd_key),
//   * a valid slot leaving stage 1 carries the total increment of all updates
//     conflated into it and requests the write back (wr_valid, wr_key,
//     wr_inc), in the same order as the reads.
// A slot lives 1+PIPE1+N1+1 = 252 cycles in stage 1, which is the window over
// which a memory read latency is hidden (gap out 6+244 = 250 slots).
//
// Interface and timing: the whole pipeline advances in a cycle with en=1 and
// holds otherwise (backpressure from the memory side). An update offered on
// in_valid/in_key/in_inc is taken in every enabled cycle. When both a write
// and a read are reported in the same cycle, the write belongs to the older
// update. Reset empties both queues.
//
// Stage 0's admit outputs are left unused on purpose: stage 0 only thins
// the stream, so its admissions are neither reads nor writes.
//
// Sizes (6, 244, six feedback stages, 10-bit lanes) follow the paper's
// evaluated schedule; the enable-based stall and the port format are this
// design's choices.
module conflation
  import cq_pkg::*;
#(
  parameter int unsigned N0    = 6,    // matchers of stage 0
  parameter int unsigned PIPE0 = 0,    // feedback pipeline of stage 0
  parameter int unsigned N1    = 244,  // matchers of stage 1
  parameter int unsigned PIPE1 = 6     // feedback pipeline of stage 1 (<= N0)
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  input  logic in_valid,
  input  key_t in_key,
  input  inc_t in_inc,
  output logic rd_valid,      // memory read request (new RMW cycle)
  output key_t rd_key,
  output logic wr_valid,      // write-back request (RMW cycle completes)
  output key_t wr_key,
  output inc_t wr_inc,
  output logic conflated0,    // an update was merged in stage 0
  output logic conflated1     // an update was merged in stage 1
);

  dp_word_t s0_in, s0_out, s1_out;
  logic     s0_admit;
  key_t     s0_admit_key;

  assign s0_in = in_valid ? dp_pack(1'b1, in_key, in_inc) : '0;

  conflation_stage #(.N(N0), .PIPE(PIPE0)) u_stage0 (
    .clk, .rst, .en,
    .in_word     (s0_in),
    .out_word    (s0_out),
    .admit_valid (s0_admit),
    .admit_key   (s0_admit_key),
    .conflated   (conflated0)
  );

  conflation_stage #(.N(N1), .PIPE(PIPE1)) u_stage1 (
    .clk, .rst, .en,
    .in_word     (s0_out),
    .out_word    (s1_out),
    .admit_valid (rd_valid),
    .admit_key   (rd_key),
    .conflated   (conflated1)
  );

  assign wr_valid = en && dp_valid(s1_out);
  assign wr_key   = dp_key(s1_out);
  assign wr_inc   = dp_inc(s1_out);

  // Stage 1 is only hazard-free if stage 0 spaces equal keys widely enough.
  if (PIPE1 > N0) begin : g_bad_schedule
    $error("conflation: PIPE1 needs a first stage of at least PIPE1 matchers");
  end

endmodule
