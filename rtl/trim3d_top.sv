// trim3d_top: the 3D-TrIM convolution accelerator.
//
// P_I cores each convolve one ifmap (input channel) with P_O kernels; core i
// slice j holds the kernel of filter j for channel i. P_O adder trees then
// add, for each filter, the psums of the P_I cores, so the array produces
// P_O ofmap values per cycle, each summed over P_I channels and K x K
// weights. The paper's main configuration is P_I = P_O = 8, K = 3: 576 PEs,
// one multiply-accumulate each per cycle. One control logic block drives all
// cores in lockstep. The ifmap and weight memories are outside this module.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//  * start with cfg_w x cfg_h begins one convolution (stride 1, no padding;
//    2K+1 <= cfg_w <= W_MAX, K <= cfg_h <= H_MAX); done pulses at the end.
//  * weights: while w_shift is high, w_data[i][j][c] must carry element
//    (w_row, c) of the kernel of core i, slice j. Rows arrive K-1 first.
//  * ifmap: in the cycle if_rd[r][c] is high, if_data[i][r][c] must carry
//    element (if_y[r][c], if_x[r][c]) of ifmap i (combinational read; the
//    PE registers it). Each element is requested exactly once per run.
//  * ofmap: when ofmap_valid is high, ofmap[j] is output (ofmap_y, ofmap_x)
//    of filter j, one value per filter per cycle in raster order.
// Bus widths, the memory protocol and the stride/padding limits are this
// design's choices; the block structure follows the paper.
module trim3d_top
  import trim_pkg::*;
#(
  parameter  int unsigned P_I   = 8,
  parameter  int unsigned P_O   = 8,
  parameter  int unsigned K     = 3,
  parameter  int unsigned W_MAX = 227,
  parameter  int unsigned H_MAX = 227,
  localparam int unsigned CW    = $clog2(W_MAX + 1),
  localparam int unsigned CH    = $clog2(H_MAX + 1),
  localparam int unsigned CK    = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] cfg_w,
  input  logic [CH-1:0] cfg_h,
  output logic          busy,
  output logic          done,
  // weight memory
  output logic          w_shift,
  output logic [CK-1:0] w_row,
  input  wgt_t          w_data  [P_I][P_O][K],
  // ifmap memory
  output logic          if_rd   [K][K],
  output logic [CH-1:0] if_y    [K][K],
  output logic [CW-1:0] if_x    [K][K],
  input  act_t          if_data [P_I][K][K],
  // ofmaps
  output logic          ofmap_valid,
  output logic [CH-1:0] ofmap_y,
  output logic [CW-1:0] ofmap_x,
  output psum_t         ofmap   [P_O]
);
  logic [CW-1:0] cur_w;
  act_src_e      pe_src    [K][K];
  logic          sr_en;
  logic          first_row [K-1];
  logic          shd_en    [K-1];
  logic          shd_sel   [K-1];
  psum_t         core_psum [P_I][P_O];
  psum_t         tree_in   [P_O][P_I];


  trim_ctrl #(.K(K), .W_MAX(W_MAX), .H_MAX(H_MAX)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .cfg_w    (cfg_w),
    .cfg_h    (cfg_h),
    .busy     (busy),
    .done     (done),
    .cur_w    (cur_w),
    .w_shift  (w_shift),
    .w_row    (w_row),
    .ext_ld   (if_rd),
    .ext_y    (if_y),
    .ext_x    (if_x),
    .pe_src   (pe_src),
    .sr_en    (sr_en),
    .first_row(first_row),
    .shd_en   (shd_en),
    .shd_sel  (shd_sel),
    .out_valid(ofmap_valid),
    .out_y    (ofmap_y),
    .out_x    (ofmap_x)
  );

  for (genvar i = 0; i < P_I; i++) begin : g_core
    trim_core #(.K(K), .P_O(P_O), .W_MAX(W_MAX)) u_core (
      .clk      (clk),
      .rst_n    (rst_n),
      .cfg_w    (cur_w),
      .a_ext    (if_data[i]),
      .a_ext_ld (if_rd),
      .src      (pe_src),
      .w_in     (w_data[i]),
      .w_shift  (w_shift),
      .sr_en    (sr_en),
      .first_row(first_row),
      .shd_en   (shd_en),
      .shd_sel  (shd_sel),
      .psum_out (core_psum[i])
    );
  end

  for (genvar j = 0; j < P_O; j++) begin : g_tree
    for (genvar i = 0; i < P_I; i++) begin : g_in
      assign tree_in[j][i] = core_psum[i][j];
    end
    adder_tree #(.N(P_I)) u_tree (
      .clk  (clk),
      .rst_n(rst_n),
      .in   (tree_in[j]),
      .sum  (ofmap[j])
    );
  end
endmodule
