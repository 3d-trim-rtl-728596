// pe_tb: self-checking test of one processing element.
//
// Random activations, weights, sources and psums are applied every cycle.
// A small model kept here tracks the A and weight registers and predicts,
// for each cycle, the activation the PE must select; the test then checks
// that a_left shows it one cycle later and psum_out shows
// psum_in(t+1) + a(t)*w(t) two cycles later, and that w_out follows the
// weight register only while w_shift is high.
module pe_tb;
  import trim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  act_t a_ext, a_irb, a_right, a_q, a_left;
  logic a_ext_ld, w_shift;
  act_src_e src;
  wgt_t w_in, w_out;
  psum_t psum_in, psum_out;

  pe dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  act_t  m_a;        // model A register
  wgt_t  m_w;        // model weight register
  act_t  exp_left;   // expected a_left after this edge
  psum_t exp_prod;   // expected product register
  int    n_src [3];

  task automatic check(input string what, input psum_t got, input psum_t exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    a_ext = '0; a_irb = '0; a_right = '0; a_ext_ld = 0; w_shift = 0;
    src = SRC_EXT; w_in = '0; psum_in = '0;
    m_a = '0; m_w = '0; exp_prod = '0; exp_left = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      act_t cur;
      // drive cycle t
      a_ext    = act_t'($urandom);
      a_irb    = act_t'($urandom);
      a_right  = act_t'($urandom);
      a_ext_ld = ($urandom_range(3) == 0);
      w_shift  = ($urandom_range(7) == 0);
      w_in     = wgt_t'($urandom);
      psum_in  = psum_t'($urandom);
      src      = act_src_e'($urandom_range(2));
      n_src[src]++;
      #1;
      cur = (src == SRC_EXT) ? m_a : (src == SRC_IRB) ? a_irb : a_right;
      @(posedge clk);
      #1;
      // after the edge
      check("a_left", psum_t'(a_left), psum_t'(cur));
      // psum register: psum_in of this cycle plus the product register,
      // which holds the previous cycle's multiply
      if (t > 0) check("psum", psum_out, psum_t'(psum_in + exp_prod));
      exp_prod = psum_t'(cur) * psum_t'(m_w);
      if (a_ext_ld) m_a = a_ext;
      if (w_shift)  m_w = w_in;
      check("a_q", psum_t'(a_q), psum_t'(m_a));
      check("w_out", psum_t'(w_out), psum_t'(m_w));
    end
    checks++;
    if (n_src[0] == 0 || n_src[1] == 0 || n_src[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
