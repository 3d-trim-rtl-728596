// trim_core: one 3D-TrIM core, P_O slices sharing one Input Recycling Buffer.
//
// A core convolves one ifmap with P_O kernels, one per slice (each kernel
// belongs to a different 3D filter). All slices see the same activations
// from memory and the same source selects; each holds its own weights and
// produces its own psum stream. As in the paper, slice 0 alone fills the IRB
// and the IRB output is broadcast to the diagonal inputs of every slice, so
// one buffer serves the whole core. The control signals come from the
// shared control logic; psum_out[j] is the result of slice j and goes to
// adder tree j at the top level.
module trim_core
  import trim_pkg::*;
#(
  parameter  int unsigned K     = 3,
  parameter  int unsigned P_O   = 8,
  parameter  int unsigned W_MAX = 227,
  localparam int unsigned CW    = $clog2(W_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] cfg_w,
  input  act_t          a_ext     [K][K],
  input  logic          a_ext_ld  [K][K],
  input  act_src_e      src       [K][K],
  input  wgt_t          w_in      [P_O][K],
  input  logic          w_shift,
  input  logic          sr_en,
  input  logic          first_row [K-1],
  input  logic          shd_en    [K-1],
  input  logic          shd_sel   [K-1],
  output psum_t         psum_out  [P_O]
);
  act_t a_irb   [K-1][K];
  act_t a_left0 [P_O][K];
  act_t a_edge  [P_O][K];
  act_t irb_in  [K-1];
  act_t irb_edge[K-1];

  for (genvar j = 0; j < P_O; j++) begin : g_slice
    trim_slice #(.K(K)) u_slice (
      .clk     (clk),
      .rst_n   (rst_n),
      .a_ext   (a_ext),
      .a_ext_ld(a_ext_ld),
      .src     (src),
      .a_irb   (a_irb),
      .w_in    (w_in[j]),
      .w_shift (w_shift),
      .a_left0 (a_left0[j]),
      .a_edge  (a_edge[j]),
      .psum_out(psum_out[j])
    );
  end

  for (genvar r = 0; r < K - 1; r++) begin : g_irb_in
    assign irb_in[r]   = a_left0[0][r+1];
    assign irb_edge[r] = a_edge[0][r+1];
  end

  irb #(.K(K), .W_MAX(W_MAX)) u_irb (
    .clk         (clk),
    .rst_n       (rst_n),
    .sr_en       (sr_en),
    .cfg_w       (cfg_w),
    .a_from_slice(irb_in),
    .a_edge      (irb_edge),
    .first_row   (first_row),
    .shd_en      (shd_en),
    .shd_sel     (shd_sel),
    .to_pe       (a_irb)
  );
endmodule
