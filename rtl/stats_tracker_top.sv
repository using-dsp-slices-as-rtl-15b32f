// stats_tracker_top: online event statistics in off-chip memory with a
// DSP-mapped update conflation queue.
//
// Every event carries a key; the memory holds one counter word per key
// (master and shadow count). Counting an event is a read-modify-write of its
// word, and the memory's long read latency would let a second update of the
// same key read a stale value. The tracker therefore keeps every key whose
// read-modify-write cycle is open in a fully associative conflation queue and
// folds later events of the same key into the pending increment instead of
// starting another cycle.
//
// Structure (fast tracker clock clk, memory user clock mclk):
//   event_source -> lane select (master, or shadow during a snapshot)
//     -> conflation (stage 0: 6 matchers, stage 1: 244 matchers with six
//        feedback stages) --RD/WR--> rmw_scheduler (clock crossing, grouping,
//        reply FIFO and write-back adder)
//     -> mem_arbiter <- counter_init, snapshot_reader
//     -> controller ports (four command lanes, replies in order).
// The whole conflation pipeline advances every clk cycle unless the
// scheduler's crossing FIFOs are full; that stall is the only backpressure
// and also holds the event source.
//
// Ports: ev_enable/key_mask drive the event source; init_start/init_busy and
// snap_start/snap_active plus the snap_* result lanes are in the mclk domain;
// the mc_* ports connect to a memory controller with four command lanes
// (commands taken when mc_ready, read data returned in command order with
// lower lanes older). The remaining outputs are event pulses for observation.
// Resets: rst (clk domain) and mrst (mclk domain), synchronous, applied
// together.
//
// The block structure and sizes follow the paper's application setup;
// interface formats, the snapshot flush handshake and the memory word layout are this
// design's choices. The memory controller and the memory are not part of it.
module stats_tracker_top
  import cq_pkg::*;
#(
  parameter int unsigned     N0          = 6,
  parameter int unsigned     N1          = 244,
  parameter int unsigned     PIPE1       = 6,
  parameter longint unsigned WORDS       = 64'd1 << KEY_W,
  parameter int unsigned     REQ_DEPTH   = 512,
  parameter int unsigned     REPLY_DEPTH = 512,
  parameter int unsigned     GROUP       = 16
) (
  input  logic clk,
  input  logic rst,
  input  logic mclk,
  input  logic mrst,
  // event source control (clk)
  input  logic ev_enable,
  input  key_t key_mask,
  // administration (mclk)
  input  logic init_start,
  output logic init_busy,
  input  logic snap_start,
  output logic snap_active,
  output logic [MEM_LANES-1:0]            snap_valid,
  output key_t [MEM_LANES-1:0]            snap_key,
  output logic [MEM_LANES-1:0][CTR_W-1:0] snap_master,
  output logic [MEM_LANES-1:0][CTR_W-1:0] snap_shadow,
  // memory controller (mclk)
  output logic      [MEM_LANES-1:0] mc_cmd_valid,
  output mem_cmd_t  [MEM_LANES-1:0] mc_cmd,
  input  logic                      mc_ready,
  input  logic      [MEM_LANES-1:0] mc_rd_valid,
  input  mem_word_t [MEM_LANES-1:0] mc_rd_data,
  // observation pulses
  output logic ev_taken,      // clk: an event entered the conflation
  output logic stall,         // clk: pipeline held by backpressure
  output logic conflated0,    // clk: event merged in stage 0
  output logic conflated1,    // clk: update merged in stage 1
  output logic rmw_read,      // clk: read request issued
  output logic rmw_write,     // clk: write-back request issued
  output logic read_held,     // mclk: a read waited behind an older write
  output logic kind_switch    // mclk: command kind changed
);
  localparam int unsigned LW = $clog2(MEM_LANES+1);

  // ------------------------------------------------------------ clk domain
  logic en, req_full;
  logic ev_valid;
  key_t ev_key;
  logic snap_s1, snap_s2;    // snapshot flag synchronised into clk
  inc_t ev_inc;
  logic rd_valid, wr_valid;
  key_t rd_key, wr_key;
  inc_t wr_inc;

  assign en = !req_full;

  always_ff @(posedge clk) begin
    if (rst) begin
      snap_s1 <= 1'b0;
      snap_s2 <= 1'b0;
    end else begin
      snap_s1 <= snap_active;
      snap_s2 <= snap_s1;
    end
  end

  event_source u_source (
    .clk, .rst, .enable (ev_enable), .key_mask, .ready (en),
    .out_valid (ev_valid), .out_key (ev_key)
  );

  // Lane designation happens before any conflation, in arrival order.
  assign ev_inc = snap_s2 ? inc_t'(1) << CNT_W : inc_t'(1);

  conflation #(.N0(N0), .PIPE0(0), .N1(N1), .PIPE1(PIPE1)) u_conflation (
    .clk, .rst, .en,
    .in_valid (ev_valid), .in_key (ev_key), .in_inc (ev_inc),
    .rd_valid, .rd_key, .wr_valid, .wr_key, .wr_inc,
    .conflated0, .conflated1
  );

  assign ev_taken  = en && ev_valid;
  assign stall     = !en;
  assign rmw_read  = rd_valid;
  assign rmw_write = wr_valid;

  // ----------------------------------------------------------- mclk domain
  logic      [MEM_LANES-1:0] sch_valid, ini_valid, snp_valid;
  mem_cmd_t  [MEM_LANES-1:0] sch_cmd, ini_cmd, snp_cmd;
  logic                      sch_ready, ini_ready, snp_ready;
  logic      [LW-1:0]        sch_rpl_n, snp_rpl_n;
  mem_word_t [MEM_LANES-1:0] sch_rpl_data, snp_rpl_data;

  // Slots between the event input and a write request: stage 0 (N0+1),
  // stage 1 (PIPE1+2+N1+1) and a small margin.
  localparam int unsigned PIPE_DEPTH = N0 + N1 + PIPE1 + 8;
  logic master_flushed;

  rmw_scheduler #(
    .REQ_DEPTH(REQ_DEPTH), .REPLY_DEPTH(REPLY_DEPTH), .GROUP(GROUP), .PIPE_DEPTH(PIPE_DEPTH)
  ) u_sched (
    .clk, .rst,
    .rd_valid, .rd_key, .wr_valid, .wr_key, .wr_inc, .req_full,
    .en, .lane_shadow (snap_s2),
    .mclk, .mrst, .snap_active, .master_flushed,
    .cmd_valid (sch_valid), .cmd (sch_cmd), .cmd_ready (sch_ready),
    .rpl_n (sch_rpl_n), .rpl_data (sch_rpl_data),
    .read_held, .kind_switch
  );

  counter_init #(.WORDS(WORDS)) u_init (
    .clk (mclk), .rst (mrst), .start (init_start), .busy (init_busy),
    .cmd_valid (ini_valid), .cmd (ini_cmd), .ready (ini_ready)
  );

  snapshot_reader #(.WORDS(WORDS)) u_snap (
    .clk (mclk), .rst (mrst), .start (snap_start), .active (snap_active),
    .flushed (master_flushed),
    .cmd_valid (snp_valid), .cmd (snp_cmd), .ready (snp_ready),
    .rpl_n (snp_rpl_n), .rpl_data (snp_rpl_data),
    .out_valid (snap_valid), .out_key (snap_key),
    .out_master (snap_master), .out_shadow (snap_shadow)
  );

  mem_arbiter u_arb (
    .clk (mclk), .rst (mrst),
    .init_valid (ini_valid), .init_cmd (ini_cmd), .init_ready (ini_ready),
    .sch_valid, .sch_cmd, .sch_ready, .sch_rpl_n, .sch_rpl_data,
    .snap_valid (snp_valid), .snap_cmd (snp_cmd), .snap_ready (snp_ready),
    .snap_rpl_n (snp_rpl_n), .snap_rpl_data (snp_rpl_data),
    .mc_cmd_valid, .mc_cmd, .mc_ready, .mc_rd_valid, .mc_rd_data
  );

endmodule
