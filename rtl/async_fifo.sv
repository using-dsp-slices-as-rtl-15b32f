// async_fifo: clock-domain-crossing FIFO with one write per cycle on the
// write side and up to P reads per cycle on the read side.
//
// It carries requests from the fast tracker clock to the slower memory user
// clock. Pointers are binary in their own domain and cross as Gray code
// through two-flop synchronizers; the write side sees the read pointer late
// and so reports full conservatively, the read side sees the write pointer
// late and so reports a conservative count. The storage is an array written
// in the write domain and read asynchronously in the read domain; a word is
// only read after its pointer update has crossed, which keeps it stable.
//
// Write side: wr_en pushes wr_data; full means no push may be made.
// Read side: rd_data[j] is the j-th oldest word, valid for j < rd_count;
// rd_n (<= rd_count) words are removed at the clock edge. Each side has its
// own synchronous reset; both must be applied together.
// The FIFO is this design's realisation of "takes the memory transaction
// requests into the slower memory user clock domain".
module async_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 64,   // power of two
  parameter int unsigned P     = 4
) (
  input  logic                       wr_clk,
  input  logic                       wr_rst,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic                       full,
  input  logic                       rd_clk,
  input  logic                       rd_rst,
  input  logic [$clog2(P+1)-1:0]     rd_n,
  output logic [P-1:0][W-1:0]        rd_data,
  output logic [$clog2(DEPTH+1)-1:0] rd_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, wptr_gray, rptr, rptr_gray;
  logic [AW:0]  rptr_gray_s1, rptr_gray_s2;   // in the write domain
  logic [AW:0]  wptr_gray_s1, wptr_gray_s2;   // in the read domain
  logic [AW:0]  rptr_w, wptr_r;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain
  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wptr <= '0;
      wptr_gray <= '0;
      rptr_gray_s1 <= '0;
      rptr_gray_s2 <= '0;
    end else begin
      rptr_gray_s1 <= rptr_gray;
      rptr_gray_s2 <= rptr_gray_s1;
      if (wr_en && !full) begin
        wptr      <= wptr + 1'b1;
        wptr_gray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wr_data;
  end

  assign rptr_w = gray2bin(rptr_gray_s2);
  assign full   = (wptr - rptr_w) >= (AW+1)'(DEPTH);

  // ---------------- read domain
  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rptr <= '0;
      rptr_gray <= '0;
      wptr_gray_s1 <= '0;
      wptr_gray_s2 <= '0;
    end else begin
      wptr_gray_s1 <= wptr_gray;
      wptr_gray_s2 <= wptr_gray_s1;
      rptr      <= rptr + (AW+1)'(rd_n);
      rptr_gray <= bin2gray(rptr + (AW+1)'(rd_n));
    end
  end

  assign wptr_r   = gray2bin(wptr_gray_s2);
  assign rd_count = ($clog2(DEPTH+1))'(wptr_r - rptr);

  always_comb begin
    for (int unsigned j = 0; j < P; j++)
      rd_data[j] = mem[AW'(rptr + (AW+1)'(j))];
  end

  a_rd: assert property (@(posedge rd_clk) disable iff (rd_rst) $clog2(DEPTH+1)'(rd_n) <= rd_count);

endmodule
