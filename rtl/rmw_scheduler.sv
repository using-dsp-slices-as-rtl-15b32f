// rmw_scheduler: read-modify-write scheduler between the conflation queue
// and the memory arbiter.
//
// Fast (tracker) clock side: the conflation reports a read request (rd_*)
// when an update opens a read-modify-write cycle and a write request (wr_*)
// with the conflated increment when the cycle ends. Both go into clock
// crossing FIFOs. Every read is tagged with the number of writes requested up
// to and including its own cycle, so the memory side knows which writes are
// older than it. req_full stops the conflation pipeline while either FIFO is
// full (the only source of backpressure).
//
// Memory user clock side, one decision per cycle over the four command lanes:
//   * a read may be issued only when every older write has been issued
//     (reads never overtake writes; this is the hazard rule that keeps a new
//     read of a key behind the write back of its previous cycle),
//   * a write needs the reply of its read; replies arrive in read order and
//     are buffered in a reply FIFO, and the write's data is the reply plus
//     the conflated increment, lane by lane,
//   * a read is only issued while the reply FIFO has room for its reply,
//   * all commands of one cycle are of one kind, up to four, and the
//     scheduler stays with one kind until it has nothing of that kind to
//     issue or has issued GROUP commands while the other kind waits.
// Snapshot support: while lane_shadow (clk domain) is high, the scheduler
// counts PIPE_DEPTH enabled pipeline cycles, after which no master-lane
// increment is left in the conflation queue, and then master_flushed (mclk
// domain) rises once every write requested up to that point has been issued.
// Counter words hold a 32-bit master count (bits 31:0) and a 32-bit shadow
// count (bits 63:32). While snap_active is low, a write back also folds the
// shadow count into the master count; during a snapshot the two stay apart.
//
// Interface: cmd_valid[j]/cmd[j] present up to four commands from lane 0 on;
// they are taken when cmd_ready is high. rpl_n replies (rpl_data[0..]) are
// delivered per cycle in read order. Reset: both resets applied together.
//
// The paper gives the scheduler's duties (clock crossing, grouping into four
// lanes, reads never passing writes) and the reply FIFO with the final adder;
// the tagging scheme, the group limit, the credit rule, the snapshot flush
// handshake and the shadow fold
// are this design's choices.
module rmw_scheduler
  import cq_pkg::*;
#(
  parameter int unsigned REQ_DEPTH   = 512,  // depth of each crossing FIFO
  parameter int unsigned REPLY_DEPTH = 512,  // reply buffer depth
  parameter int unsigned GROUP       = 16,   // commands per kind before yielding
  parameter int unsigned SEQ_W       = 16,   // width of the write sequence tags
  parameter int unsigned PIPE_DEPTH  = 264   // slots from event input to write request
) (
  // fast clock domain
  input  logic clk,
  input  logic rst,
  input  logic rd_valid,
  input  key_t rd_key,
  input  logic wr_valid,
  input  key_t wr_key,
  input  inc_t wr_inc,
  output logic req_full,
  input  logic en,             // conflation pipeline advances
  input  logic lane_shadow,    // events are designated to the shadow lane
  // memory user clock domain
  input  logic                           mclk,
  input  logic                           mrst,
  input  logic                           snap_active,
  output logic                           master_flushed, // all master increments written
  output logic     [MEM_LANES-1:0]       cmd_valid,
  output mem_cmd_t [MEM_LANES-1:0]       cmd,
  input  logic                           cmd_ready,
  input  logic     [$clog2(MEM_LANES+1)-1:0] rpl_n,
  input  mem_word_t [MEM_LANES-1:0]      rpl_data,
  // observation (memory domain)
  output logic                           read_held,   // a read waited for an older write
  output logic                           kind_switch  // the command kind changed
);
  localparam int unsigned L   = MEM_LANES;
  localparam int unsigned LW  = $clog2(L+1);
  localparam int unsigned QW  = $clog2(REQ_DEPTH+1);
  localparam int unsigned RW  = $clog2(REPLY_DEPTH+1);

  typedef struct packed {
    key_t             key;
    logic [SEQ_W-1:0] seq;   // writes requested up to this read
  } rd_ent_t;

  // ---------------------------------------------------------------- fast side
  logic             rd_full, wr_full;
  logic [SEQ_W-1:0] wr_seq;
  logic [SEQ_W-1:0] wr_seq_next;

  assign wr_seq_next = wr_seq + SEQ_W'(wr_valid);
  assign req_full    = rd_full || wr_full;

  always_ff @(posedge clk) begin
    if (rst) wr_seq <= '0;
    else     wr_seq <= wr_seq_next;
  end

  rd_ent_t [L-1:0] rq_data;
  wr_req_t [L-1:0] wq_data;
  logic [QW-1:0]   rq_count, wq_count;
  logic [LW-1:0]   rq_pop, wq_pop;

  async_fifo #(.W($bits(rd_ent_t)), .DEPTH(REQ_DEPTH), .P(L)) u_rdq (
    .wr_clk (clk), .wr_rst (rst), .wr_en (rd_valid),
    .wr_data (rd_ent_t'{key: rd_key, seq: wr_seq_next}), .full (rd_full),
    .rd_clk (mclk), .rd_rst (mrst), .rd_n (rq_pop), .rd_data (rq_data), .rd_count (rq_count)
  );

  async_fifo #(.W($bits(wr_req_t)), .DEPTH(REQ_DEPTH), .P(L)) u_wrq (
    .wr_clk (clk), .wr_rst (rst), .wr_en (wr_valid),
    .wr_data (wr_req_t'{key: wr_key, inc: wr_inc}), .full (wr_full),
    .rd_clk (mclk), .rd_rst (mrst), .rd_n (wq_pop), .rd_data (wq_data), .rd_count (wq_count)
  );

  // Snapshot flush: once events go to the shadow lane, every master increment
  // has left the conflation pipeline after PIPE_DEPTH enabled cycles.
  localparam int unsigned FW = $clog2(PIPE_DEPTH+1);
  logic [FW-1:0] flush_cnt;
  logic          flushed_f;

  always_ff @(posedge clk) begin
    if (rst || !lane_shadow) begin
      flush_cnt <= '0;
      flushed_f <= 1'b0;
    end else if (en) begin
      if (flush_cnt == FW'(PIPE_DEPTH)) flushed_f <= 1'b1;
      else                             flush_cnt <= flush_cnt + 1'b1;
    end
  end

  // -------------------------------------------------------------- memory side
  mem_word_t [L-1:0] rp_data;
  logic [RW-1:0]     rp_count, rp_space;
  logic [LW-1:0]     rp_pop;
  logic [RW-1:0]     inflight;        // reads issued, reply not yet buffered
  logic [SEQ_W-1:0]  wr_issued;       // writes issued so far
  logic              dir_wr;          // kind of the current group
  logic [7:0]        grp_cnt;         // commands issued in the current group

  mp_fifo #(.W(MEM_DW), .DEPTH(REPLY_DEPTH), .P(L)) u_reply (
    .clk (mclk), .rst (mrst),
    .push_n (rpl_n), .push_data (rpl_data),
    .pop_n (rp_pop), .pop_data (rp_data),
    .count (rp_count), .space (rp_space)
  );

  logic [LW-1:0] n_rd, n_wr;   // issuable commands of each kind
  logic          rd_blocked;   // first read waits for an older write
  logic          issue_wr, issue_rd;

  always_comb begin
    int credit;
    logic stop;
    credit = int'(rp_space) - int'(inflight);
    // reads: leading entries whose older writes are all issued
    n_rd = '0;
    stop = 1'b0;
    rd_blocked = 1'b0;
    for (int unsigned j = 0; j < L; j++) begin
      if (!stop && j < rq_count && int'(j) < credit) begin
        if ($signed(wr_issued - rq_data[j].seq) >= 0) n_rd = n_rd + 1'b1;
        else begin
          stop = 1'b1;
          if (j == 0) rd_blocked = 1'b1;
        end
      end else stop = 1'b1;
    end
    // writes: need the request and the reply of its read
    n_wr = '0;
    for (int unsigned j = 0; j < L; j++)
      if (j < wq_count && j < rp_count) n_wr = n_wr + 1'b1;
    // kind selection
    if (dir_wr) begin
      issue_wr = (n_wr != 0) && !(grp_cnt >= 8'(GROUP) && n_rd != 0);
      issue_rd = !issue_wr && (n_rd != 0);
    end else begin
      issue_rd = (n_rd != 0) && !(grp_cnt >= 8'(GROUP) && n_wr != 0);
      issue_wr = !issue_rd && (n_wr != 0);
    end
  end

  // command lanes
  always_comb begin
    for (int unsigned j = 0; j < L; j++) begin
      logic [CTR_W-1:0] m, s;
      m = rp_data[j][CTR_W-1:0] + CTR_W'(wq_data[j].inc[CNT_W-1:0]);
      s = rp_data[j][2*CTR_W-1:CTR_W] + CTR_W'(wq_data[j].inc[INC_W-1:CNT_W]);
      if (!snap_active) begin
        m = m + s;
        s = '0;
      end
      cmd_valid[j] = issue_wr ? (j < n_wr) : issue_rd ? (j < n_rd) : 1'b0;
      cmd[j].we    = issue_wr;
      cmd[j].addr  = issue_wr ? wq_data[j].key : rq_data[j].key;
      cmd[j].wdata = issue_wr ? ctr_pack(m, s) : '0;
    end
  end

  logic fire;
  assign fire   = cmd_ready && (issue_wr || issue_rd);
  assign rq_pop = (fire && issue_rd) ? n_rd : '0;
  assign wq_pop = (fire && issue_wr) ? n_wr : '0;
  assign rp_pop = (fire && issue_wr) ? n_wr : '0;

  // The flushed flag rises after the last master write request was pushed,
  // so when it is seen here the write FIFO count already includes that write.
  logic             fl_s1, fl_s2, fl_seen;
  logic [SEQ_W-1:0] fl_target;

  always_ff @(posedge mclk) begin
    if (mrst) begin
      fl_s1 <= 1'b0; fl_s2 <= 1'b0; fl_seen <= 1'b0; fl_target <= '0;
    end else begin
      fl_s1 <= flushed_f;
      fl_s2 <= fl_s1;
      if (!fl_s2) fl_seen <= 1'b0;
      else if (!fl_seen) begin
        fl_seen   <= 1'b1;
        fl_target <= wr_issued + SEQ_W'(wq_count);
      end
    end
  end

  assign master_flushed = fl_seen && ($signed(wr_issued - fl_target) >= 0);

  always_ff @(posedge mclk) begin
    if (mrst) begin
      inflight  <= '0;
      wr_issued <= '0;
      dir_wr    <= 1'b0;
      grp_cnt   <= '0;
    end else begin
      inflight  <= inflight + RW'(rq_pop) - RW'(rpl_n);
      wr_issued <= wr_issued + SEQ_W'(wq_pop);
      if (fire) begin
        if (issue_wr != dir_wr) begin
          dir_wr  <= issue_wr;
          grp_cnt <= 8'(issue_wr ? n_wr : n_rd);
        end else if (grp_cnt < 8'd250) begin
          grp_cnt <= grp_cnt + 8'(issue_wr ? n_wr : n_rd);
        end
      end
    end
  end

  assign read_held   = rd_blocked;
  assign kind_switch = fire && (issue_wr != dir_wr);

endmodule
