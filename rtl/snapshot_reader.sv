// snapshot_reader: non-disruptive snapshot readout of all counters.
//
// Each counter word holds a master and a shadow count. On a start pulse the
// reader raises snap_active, which (after crossing into the tracker clock)
// makes every new event count into the shadow lane instead of the master
// lane; the lane is chosen before the event enters the conflation queue, so
// the designation follows the events' arrival order. The reader then waits
// for flushed, which the read-modify-write scheduler raises once every
// master increment still inside the tracker has been written, reads the words 0..WORDS-1 four per cycle at the arbiter's lowest
// priority, and emits each reply as (key, master, shadow) on the snap_out
// lanes. When the last reply has arrived, snap_active drops and later write
// backs fold the shadow counts into the master counts again.
//
// Interface: start pulse, active level, flushed input; cmd_valid/cmd/ready toward the
// arbiter; rpl_n/rpl_data replies in read order; out_valid[j]/out_key[j]/
// out_master[j]/out_shadow[j] for up to four results per cycle. Memory user
// clock domain, synchronous reset.
//
// The paper describes the master/shadow split and the snapshot client of
// the arbiter; the flush handshake, the fold on write back and the output
// format are this design's choices.
module snapshot_reader
  import cq_pkg::*;
#(
  parameter longint unsigned WORDS = 64'd1 << KEY_W   // counter words to read
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  output logic                     active,
  input  logic                     flushed,   // all master increments are in memory
  output logic     [MEM_LANES-1:0] cmd_valid,
  output mem_cmd_t [MEM_LANES-1:0] cmd,
  input  logic                     ready,
  input  logic     [$clog2(MEM_LANES+1)-1:0] rpl_n,
  input  mem_word_t [MEM_LANES-1:0] rpl_data,
  output logic     [MEM_LANES-1:0] out_valid,
  output key_t     [MEM_LANES-1:0] out_key,
  output logic     [MEM_LANES-1:0][CTR_W-1:0] out_master,
  output logic     [MEM_LANES-1:0][CTR_W-1:0] out_shadow
);
  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_READ, S_WAIT} state_e;

  state_e         state;
  logic [KEY_W:0] rd_addr;   // next address to read
  logic [KEY_W:0] rp_addr;   // address of the next reply

  assign active = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      rd_addr  <= '0;
      rp_addr  <= '0;
    end else begin
      rp_addr <= rp_addr + (KEY_W+1)'(rpl_n);
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_DRAIN;
          rd_addr  <= '0;
          rp_addr  <= '0;
        end
        S_DRAIN: if (flushed) state <= S_READ;
        S_READ: if (ready) begin
          rd_addr <= rd_addr + (KEY_W+1)'(MEM_LANES);
          if (64'(rd_addr) + 64'(MEM_LANES) >= WORDS) state <= S_WAIT;
        end
        S_WAIT: if (64'(rp_addr) + 64'(rpl_n) >= WORDS) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int unsigned j = 0; j < MEM_LANES; j++) begin
      cmd_valid[j]  = (state == S_READ) && (64'(rd_addr) + 64'(j) < WORDS);
      cmd[j].we     = 1'b0;
      cmd[j].addr   = key_t'(rd_addr + (KEY_W+1)'(j));
      cmd[j].wdata  = '0;
      out_valid[j]  = j < rpl_n;
      out_key[j]    = key_t'(rp_addr + (KEY_W+1)'(j));
      out_master[j] = rpl_data[j][CTR_W-1:0];
      out_shadow[j] = rpl_data[j][2*CTR_W-1:CTR_W];
    end
  end

endmodule
