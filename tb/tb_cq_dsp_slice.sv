// tb_cq_dsp_slice: checks one first slice and one cascaded slice against a
// cycle model of the documented register behaviour.
//
// The model keeps its own copies of the A:B, C, P and Q registers and
// computes: mux = sel ? AB2 : 0, sum = mux (+ PCIN in a cascaded slice), P <=
// sum, Q <= (sum and C agree on valid flag and key), and for the cascaded
// slice the A:B path keeps only the increment lanes. Random inputs with keys
// from a tiny set make matches frequent; the enable toggles randomly.
module tb_cq_dsp_slice;
  import cq_pkg::*;

  logic clk = 0, rst = 1, en = 0;
  dp_word_t ab_in, c_in, pcin;
  logic sel0, sel1;
  dp_word_t p0, p1, abq0, abq1;
  logic q0, q1;

  cq_dsp_slice #(.FIRST(1'b1)) u_first (
    .clk, .rst, .en, .ab_in, .c_in, .pcin, .sel(sel0), .pcout(p0), .abcout(abq0), .q(q0));
  cq_dsp_slice #(.FIRST(1'b0)) u_next (
    .clk, .rst, .en, .ab_in, .c_in, .pcin(p0), .sel(sel1), .pcout(p1), .abcout(abq1), .q(q1));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_match = 0;
  // model state: index 0 first slice, 1 cascaded slice
  dp_word_t m_ab1 [2], m_ab2 [2], m_c [2], m_p [2];
  logic     m_q [2];

  function automatic dp_word_t key_bits(dp_word_t w);
    return w & ~dp_word_t'((64'd1 << INC_W) - 1) & ~(dp_word_t'(7) << 45);
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 2; i++) begin m_ab1[i] = '0; m_ab2[i] = '0; m_c[i] = '0; m_p[i] = '0; m_q[i] = 0; end
    end else if (en) begin
      dp_word_t s0, s1;
      s0 = sel0 ? m_ab2[0] : '0;
      s1 = (sel1 ? m_ab2[1] : '0) + m_p[0];
      m_q[0] = (key_bits(s0) == key_bits(m_c[0]));
      m_q[1] = (key_bits(s1) == key_bits(m_c[1]));
      m_p[0] = s0; m_p[1] = s1;
      m_ab2[0] = m_ab1[0]; m_ab2[1] = m_ab1[1];
      m_ab1[0] = ab_in;
      m_ab1[1] = ab_in & dp_word_t'((64'd1 << INC_W) - 1);
      m_c[0] = key_bits(c_in); m_c[1] = key_bits(c_in);
    end
  end

  always @(negedge clk) if (!rst) begin
    checks += 6;
    if (p0 !== m_p[0])     begin failures++; $display("FAIL p0 %h exp %h", p0, m_p[0]); end
    if (p1 !== m_p[1])     begin failures++; $display("FAIL p1 %h exp %h", p1, m_p[1]); end
    if (q0 !== m_q[0])     begin failures++; $display("FAIL q0"); end
    if (q1 !== m_q[1])     begin failures++; $display("FAIL q1"); end
    if (abq0 !== m_ab2[0]) begin failures++; $display("FAIL abcout0"); end
    if (abq1 !== m_ab2[1]) begin failures++; $display("FAIL abcout1"); end
    if (q0 || q1) n_match++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ab_in = '0; c_in = '0; pcin = '0; sel0 = 0; sel1 = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (5000) begin
      @(negedge clk);
      en   = ($urandom_range(9) != 0);
      ab_in = dp_pack($urandom_range(3) != 0, key_t'($urandom_range(2)), inc_t'($urandom));
      c_in  = $urandom_range(1) ? ab_in : dp_pack(1'b1, key_t'($urandom_range(2)), '0);
      pcin  = dp_word_t'({$urandom, $urandom});
      sel0  = $urandom_range(1);
      sel1  = $urandom_range(1);
    end
    checks++;
    if (n_match == 0) begin failures++; $display("FAIL no match seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
