// trim_slice: one 3D-TrIM slice, a K x K array of PEs and an adder tree.
//
// As in the paper, weights enter the top row and move down one row per
// cycle during loading, then stay; activations arrive vertically from
// memory into every PE, move from right to left between neighbours, and come
// back diagonally from the Input Recycling Buffer (a_irb, rows 0..K-2);
// psums move from top to bottom and the K bottom psums are added by an adder
// tree. Row r must work on a window one cycle after row r-1 so that the psum
// from above meets it; the control logic provides this skew.
//
// The slice exports, for the IRB of its core, the activations leaving the
// leftmost column (a_left0) and the A registers of the rightmost column
// (a_edge); only slice 0 of a core has them connected. psum_out holds the
// convolution result of a window PE_LAT+TREE_LAT cycles after the bottom
// row multiplied it. All PEs of a slice share the source selects given by
// the control logic.
module trim_slice
  import trim_pkg::*;
#(
  parameter int unsigned K = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  act_t     a_ext    [K][K],   // activation from memory, per PE
  input  logic     a_ext_ld [K][K],   // A register load, per PE
  input  act_src_e src      [K][K],   // activation source, per PE
  input  act_t     a_irb    [K-1][K], // diagonal activations from the IRB
  input  wgt_t     w_in     [K],      // weights entering the top row
  input  logic     w_shift,
  output act_t     a_left0  [K],      // [r]: activation leaving PE(r,0)
  output act_t     a_edge   [K],      // [r]: A register of PE(r,K-1)
  output psum_t    psum_out
);
  act_t  a_left [K][K];
  act_t  a_q    [K][K];
  wgt_t  w_out  [K][K];
  psum_t psum   [K][K];

  for (genvar r = 0; r < K; r++) begin : g_r
    for (genvar c = 0; c < K; c++) begin : g_c
      act_t  a_right_i;
      act_t  a_irb_i;
      wgt_t  w_in_i;
      psum_t psum_in_i;

      if (c == K - 1) begin : g_right_edge
        assign a_right_i = '0;
      end else begin : g_right
        assign a_right_i = a_left[r][c+1];
      end
      if (r == K - 1) begin : g_no_irb
        assign a_irb_i = '0;
      end else begin : g_irb
        assign a_irb_i = a_irb[r][c];
      end
      if (r == 0) begin : g_top
        assign w_in_i    = w_in[c];
        assign psum_in_i = '0;
      end else begin : g_below
        assign w_in_i    = w_out[r-1][c];
        assign psum_in_i = psum[r-1][c];
      end

      pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .a_ext   (a_ext[r][c]),
        .a_ext_ld(a_ext_ld[r][c]),
        .a_irb   (a_irb_i),
        .a_right (a_right_i),
        .src     (src[r][c]),
        .w_in    (w_in_i),
        .w_shift (w_shift),
        .psum_in (psum_in_i),
        .a_q     (a_q[r][c]),
        .a_left  (a_left[r][c]),
        .w_out   (w_out[r][c]),
        .psum_out(psum[r][c])
      );
    end
    assign a_left0[r] = a_left[r][0];
    assign a_edge[r]  = a_q[r][K-1];
  end

  adder_tree #(.N(K)) u_tree (
    .clk  (clk),
    .rst_n(rst_n),
    .in   (psum[K-1]),
    .sum  (psum_out)
  );
endmodule
