// pe: one processing element of a 3D-TrIM slice.
//
// Following the PE drawn in the paper, the element holds an A register for
// the activation fetched from memory, a weight register, a product register,
// a psum register and a register that passes the current activation to the
// PE on its left (or, for the leftmost column, to the IRB). Two multiplexers
// pick the activation used in this cycle: the first chooses between the A
// register and the IRB input, the second between that and the right-hand
// neighbour's output. The multiply-accumulate is pipelined in two stages:
// the product is registered, then added to the psum arriving from the PE
// above and registered again.
//
// Timing: with src selecting the activation at cycle t, a_left shows it at
// t+1 and psum_out holds psum_in(t+1) + a(t)*w at t+2. The psum arriving from
// the row above must therefore be one cycle behind this row's activation,
// which the row-by-row skew of the dataflow provides. Weights shift down by
// one PE per cycle while w_shift is high and stay put otherwise (weight
// stationary). Reset is asynchronous and active low; widths and reset are
// this design's choice, the register set and muxes follow the paper.
module pe
  import trim_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  act_t     a_ext,     // activation from memory
  input  logic     a_ext_ld,  // load a_ext into the A register
  input  act_t     a_irb,     // activation returned by the IRB
  input  act_t     a_right,   // activation from the PE on the right
  input  act_src_e src,       // activation source for this cycle
  input  wgt_t     w_in,      // weight from the PE above / memory
  input  logic     w_shift,   // weight loading phase
  input  psum_t    psum_in,   // psum from the PE above (0 on the top row)
  output act_t     a_q,       // A register
  output act_t     a_left,    // activation passed to the left PE / IRB
  output wgt_t     w_out,     // weight passed to the PE below
  output psum_t    psum_out   // psum passed to the PE below
);
  act_t  a_mux1;
  act_t  a_cur;
  psum_t prod_q;

  always_comb begin
    a_mux1 = (src == SRC_IRB)   ? a_irb   : a_q;
    a_cur  = (src == SRC_RIGHT) ? a_right : a_mux1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q      <= '0;
      a_left   <= '0;
      w_out    <= '0;
      prod_q   <= '0;
      psum_out <= '0;
    end else begin
      if (a_ext_ld) a_q <= a_ext;
      if (w_shift)  w_out <= w_in;
      a_left   <= a_cur;
      prod_q   <= psum_t'(a_cur) * psum_t'(w_out);
      psum_out <= psum_in + prod_q;
    end
  end
endmodule
