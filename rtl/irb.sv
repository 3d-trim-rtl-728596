// irb: Input Recycling Buffer of one 3D-TrIM core.
//
// The IRB stores the ifmap activations that a core will need again once the
// K x K window slides down by one row, so each activation is read from memory
// only once. Following the paper it holds K-1 reconfigurable shift registers,
// (K-1) x (K-1) shadow registers and multiplexers. Row r of the buffer
// (r = 0..K-2) serves PE row r of every slice of the core and is filled from
// PE row r+1 of slice 0:
//  * shift register r takes the activation leaving PE(r+1,0) each cycle and
//    returns it diagonally, through taps selected by the ifmap width, to
//    PE(r,0..K-1) at the first window of a row and to PE(r,K-1) afterwards;
//  * the K-1 end-of-row activations never reach the leftmost column, so the
//    shadow chain r captures the activations that PE(r+1,K-1) uses in the
//    last K-1 windows of a row and gives them back to PE(r,K-1) in the last
//    K-1 windows of the next row. For the bottom buffer row the captured
//    value is the bottom-right PE's A register; for the others it is the
//    external activation in the first output row and the diagonal value
//    (shift-register tap or lower shadow chain) afterwards, so end-of-row
//    activations move up from one shadow chain to the next.
//
// Timing: all outputs are combinational from registers and are consumed by
// the PEs in the same cycle. Shadow chain r shifts while shd_en[r] is high
// (K cycles per output row, set by the control logic); shd_sel[r] makes
// PE(r,K-1) read the oldest shadow entry instead of the shift register.
// The structure comes from the paper; the exact cycle of each capture and
// the tap arithmetic are derived in this design from the paper's dataflow
// example.
module irb
  import trim_pkg::*;
#(
  parameter  int unsigned K     = 3,
  parameter  int unsigned W_MAX = 227,
  localparam int unsigned CW    = $clog2(W_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sr_en,                // shift registers advance
  input  logic [CW-1:0] cfg_w,                // ifmap width in use
  input  act_t          a_from_slice [K-1],   // [r]: a_left of PE(r+1,0), slice 0
  input  act_t          a_edge       [K-1],   // [r]: A register of PE(r+1,K-1), slice 0
  input  logic          first_row    [K-1],   // [r]: PE row r+1 is in output row 0
  input  logic          shd_en       [K-1],   // [r]: shadow chain r shifts
  input  logic          shd_sel      [K-1],   // [r]: PE(r,K-1) reads shadow chain r
  output act_t          to_pe        [K-1][K] // [r][c]: diagonal input of PE(r,c)
);
  act_t taps   [K-1][K];
  act_t shadow [K-1][K-1];
  act_t diag   [K-1];
  act_t shd_in [K-1];

  for (genvar r = 0; r < K - 1; r++) begin : g_row
    irb_shift_reg #(.K(K), .W_MAX(W_MAX)) u_sr (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (sr_en),
      .cfg_w(cfg_w),
      .d    (a_from_slice[r]),
      .taps (taps[r])
    );

    assign diag[r] = shd_sel[r] ? shadow[r][K-2] : taps[r][K-1];

    if (r == K - 2) begin : g_bottom
      // PE row K-1 always takes its rightmost activation from memory.
      assign shd_in[r] = a_edge[r];
    end else begin : g_mid
      assign shd_in[r] = first_row[r] ? a_edge[r] : diag[r+1];
    end

    for (genvar c = 0; c < K; c++) begin : g_col
      if (c == K - 1) begin : g_last
        assign to_pe[r][c] = diag[r];
      end else begin : g_tap
        assign to_pe[r][c] = taps[r][c];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < K - 1; i++) shadow[r][i] <= '0;
      end else if (shd_en[r]) begin
        shadow[r][0] <= shd_in[r];
        for (int unsigned i = 1; i < K - 1; i++) shadow[r][i] <= shadow[r][i-1];
      end
    end
  end
endmodule
