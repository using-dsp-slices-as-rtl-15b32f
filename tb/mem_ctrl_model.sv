// mem_ctrl_model: behavioural model of a four-lane memory controller with
// its memory, for testbenches only (not synthesizable).
//
// Commands are taken on the lanes with cmd_valid set in a cycle where ready
// is high; ready is high with probability READY_PCT percent. A write updates
// the stored word at once. A read samples the stored word when it is taken
// and returns it LAT cycles later, in command order, packed from lane 0 of
// rd_valid/rd_data. Reply slots are spread a little by a random extra delay
// of up to JITTER cycles while keeping order. Words never written read as
// a recognisable garbage pattern so that a missing initialization shows.
// Writes of the zero word to a word that holds no other value are only
// recorded in a bit map (one bit per key), which keeps a full clear of 2^24
// words cheap. peek() returns a stored word for checking.
module mem_ctrl_model
  import cq_pkg::*;
#(
  parameter int unsigned LAT       = 40,
  parameter int unsigned JITTER    = 4,
  parameter int unsigned READY_PCT = 90
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic      [MEM_LANES-1:0] cmd_valid,
  input  mem_cmd_t  [MEM_LANES-1:0] cmd,
  output logic                      ready,
  output logic      [MEM_LANES-1:0] rd_valid,
  output mem_word_t [MEM_LANES-1:0] rd_data
);
  localparam mem_word_t GARBAGE = 72'hBA_D0BA_D0BA_D0BA_D0BA;

  mem_word_t store [key_t];
  bit        zeroed [1 << KEY_W];
  mem_word_t rq_data[$];
  longint    rq_due[$];
  longint    cyc = 0;
  longint    last_due = 0;
  int        n_reads = 0, n_writes = 0, n_turn = 0;
  logic      last_we = 1'b0;

  function automatic mem_word_t peek(key_t a);
    return store.exists(a) ? store[a] : zeroed[a] ? '0 : GARBAGE;
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      ready <= 1'b0;
      rd_valid <= '0;
      rq_data.delete();
      rq_due.delete();
    end else begin
      cyc++;
      if (ready) begin
        for (int j = 0; j < MEM_LANES; j++) if (cmd_valid[j]) begin
          if (cmd[j].we != last_we) n_turn++;
          last_we = cmd[j].we;
          if (cmd[j].we) begin
            if (cmd[j].wdata == '0 && !store.exists(cmd[j].addr)) zeroed[cmd[j].addr] = 1'b1;
            else store[cmd[j].addr] = cmd[j].wdata;
            n_writes++;
          end else begin
            longint due;
            due = cyc + LAT + $urandom_range(JITTER);
            if (due < last_due) due = last_due;
            last_due = due;
            rq_data.push_back(peek(cmd[j].addr));
            rq_due.push_back(due);
            n_reads++;
          end
        end
      end
      ready <= ($urandom_range(99) < READY_PCT);
      rd_valid <= '0;
      for (int j = 0; j < MEM_LANES; j++) begin
        if (rq_due.size() > 0 && rq_due[0] <= cyc) begin
          rd_valid[j] <= 1'b1;
          rd_data[j]  <= rq_data.pop_front();
          void'(rq_due.pop_front());
        end
      end
    end
  end

endmodule
