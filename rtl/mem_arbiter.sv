// mem_arbiter: funnels three command sources onto the memory controller's
// four command lanes and routes read replies back to their requester.
//
// Sources, in fixed priority: the counter initialization (writes only), the
// read-modify-write scheduler, and the snapshot readout (reads only, lowest
// priority). Each source presents up to four commands (valid bits from
// lane 0 on) and the arbiter grants one source's whole bundle per cycle when
// the controller is ready; a source sees its grant on its *_ready output.
//
// Replies come back from the controller in the order the reads were issued.
// For every read granted, the arbiter records its owner (scheduler or
// snapshot) in a FIFO; each returning reply pops one owner and is delivered
// to that source, compacted from lane 0 on with a count. Reads are only
// granted while the owner FIFO has room for four more entries.
//
// Interface: mc_cmd_valid/mc_cmd/mc_ready toward the controller; mc_rd_valid
// marks reply lanes, lower lanes holding older replies. All in the memory
// user clock domain; synchronous reset.
//
// The paper names the arbiter, its three clients and the low priority of the
// snapshot readout; the bundle-wise grant and the owner FIFO are this
// design's choices.
module mem_arbiter
  import cq_pkg::*;
#(
  parameter int unsigned OWN_DEPTH = 1024  // reads outstanding in the controller
) (
  input  logic clk,
  input  logic rst,
  // initialization (highest priority)
  input  logic     [MEM_LANES-1:0] init_valid,
  input  mem_cmd_t [MEM_LANES-1:0] init_cmd,
  output logic                     init_ready,
  // read-modify-write scheduler
  input  logic     [MEM_LANES-1:0] sch_valid,
  input  mem_cmd_t [MEM_LANES-1:0] sch_cmd,
  output logic                     sch_ready,
  output logic     [$clog2(MEM_LANES+1)-1:0] sch_rpl_n,
  output mem_word_t [MEM_LANES-1:0] sch_rpl_data,
  // snapshot readout (lowest priority)
  input  logic     [MEM_LANES-1:0] snap_valid,
  input  mem_cmd_t [MEM_LANES-1:0] snap_cmd,
  output logic                     snap_ready,
  output logic     [$clog2(MEM_LANES+1)-1:0] snap_rpl_n,
  output mem_word_t [MEM_LANES-1:0] snap_rpl_data,
  // controller
  output logic     [MEM_LANES-1:0] mc_cmd_valid,
  output mem_cmd_t [MEM_LANES-1:0] mc_cmd,
  input  logic                     mc_ready,
  input  logic     [MEM_LANES-1:0] mc_rd_valid,
  input  mem_word_t [MEM_LANES-1:0] mc_rd_data
);
  localparam int unsigned L  = MEM_LANES;
  localparam int unsigned LW = $clog2(L+1);
  localparam int unsigned OW = $clog2(OWN_DEPTH+1);

  typedef enum logic [1:0] {SRC_NONE, SRC_INIT, SRC_SCH, SRC_SNAP} src_e;

  src_e              src;
  logic [OW-1:0]     own_space, own_count;
  logic              rd_room;
  logic [L-1:0][0:0] own_push, own_pop;
  logic [LW-1:0]     own_push_n, own_pop_n;

  assign rd_room = own_space >= OW'(L);

  always_comb begin
    if (|init_valid)                 src = SRC_INIT;
    else if (|sch_valid && rd_room)  src = SRC_SCH;
    else if (|snap_valid && rd_room) src = SRC_SNAP;
    else                             src = SRC_NONE;
  end

  always_comb begin
    unique case (src)
      SRC_INIT: begin mc_cmd_valid = init_valid; mc_cmd = init_cmd; end
      SRC_SCH:  begin mc_cmd_valid = sch_valid;  mc_cmd = sch_cmd;  end
      SRC_SNAP: begin mc_cmd_valid = snap_valid; mc_cmd = snap_cmd; end
      default:  begin mc_cmd_valid = '0;         mc_cmd = init_cmd; end
    endcase
  end

  assign init_ready = mc_ready && (src == SRC_INIT);
  assign sch_ready  = mc_ready && (src == SRC_SCH);
  assign snap_ready = mc_ready && (src == SRC_SNAP);

  // owner bookkeeping: one entry per granted read (0 = scheduler, 1 = snapshot)
  always_comb begin
    own_push_n = '0;
    own_push   = '0;
    for (int unsigned j = 0; j < L; j++) begin
      if (mc_ready && mc_cmd_valid[j] && !mc_cmd[j].we) begin
        own_push[own_push_n] = (src == SRC_SNAP);
        own_push_n = own_push_n + 1'b1;
      end
    end
  end

  // reply compaction: k-th valid reply lane is the k-th oldest reply
  mem_word_t [L-1:0] rpl_c;
  always_comb begin
    own_pop_n = '0;
    rpl_c     = '0;
    for (int unsigned j = 0; j < L; j++) begin
      if (mc_rd_valid[j]) begin
        rpl_c[own_pop_n] = mc_rd_data[j];
        own_pop_n = own_pop_n + 1'b1;
      end
    end
  end

  mp_fifo #(.W(1), .DEPTH(OWN_DEPTH), .P(L)) u_owner (
    .clk, .rst,
    .push_n (own_push_n), .push_data (own_push),
    .pop_n (own_pop_n), .pop_data (own_pop),
    .count (own_count), .space (own_space)
  );

  // the controller must not return more replies than reads it was given
  a_reply_has_owner: assert property (@(posedge clk) disable iff (rst)
    OW'(own_pop_n) <= own_count);

  always_comb begin
    sch_rpl_n = '0;  sch_rpl_data = '0;
    snap_rpl_n = '0; snap_rpl_data = '0;
    for (int unsigned j = 0; j < L; j++) begin
      if (j < own_pop_n) begin
        if (own_pop[j][0]) begin
          snap_rpl_data[snap_rpl_n] = rpl_c[j];
          snap_rpl_n = snap_rpl_n + 1'b1;
        end else begin
          sch_rpl_data[sch_rpl_n] = rpl_c[j];
          sch_rpl_n = sch_rpl_n + 1'b1;
        end
      end
    end
  end

endmodule
