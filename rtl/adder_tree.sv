// adder_tree: registered binary adder tree over N psums.
//
// 3D-TrIM uses adder trees in two places: inside each slice, to add the K
// psums leaving the bottom row of PEs, and after the cores, where adder tree
// j adds the psums of slice j of all P_I cores into one ofmap value. The
// paper gives only their function; this implementation pads the operands to
// a power of two, adds them pairwise level by level in one combinational
// stage and registers the result, so the sum appears one cycle (TREE_LAT)
// after its operands. Overflow wraps; the psum width is chosen so that the
// default configuration cannot overflow.
module adder_tree
  import trim_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  psum_t in [N],
  output psum_t sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned NP     = 1 << LEVELS;

  psum_t lvl [LEVELS+1][NP];

  always_comb begin
    for (int unsigned i = 0; i < NP; i++)
      lvl[0][i] = (i < N) ? in[i] : '0;
    for (int unsigned l = 0; l < LEVELS; l++) begin
      for (int unsigned i = 0; i < NP; i++) lvl[l+1][i] = '0;
      for (int unsigned i = 0; i < (NP >> (l + 1)); i++)
        lvl[l+1][i] = lvl[l][2*i] + lvl[l][2*i+1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else        sum <= lvl[LEVELS][0];
  end
endmodule
