// irb_shift_reg: one reconfigurable shift register of the Input Recycling
// Buffer (IRB).
//
// It records, one per cycle, the activations that leave the leftmost PE of
// a slice row, so that the row above can use them again when the sliding
// window moves down by one ifmap row. The paper sizes it at W_I-K-1 stages
// for an ifmap of width W_I and makes it reconfigurable by tapping inner
// stages through a multiplexer; here it is built for the widest ifmap
// (W_MAX) and cfg_w selects the taps at run time.
//
// Stage 0 holds the newest activation. With the timing of this design an
// activation used by PE(r+1,0) reaches stage 0 two cycles later, and PE(r,c)
// needs it W_I-K-1-c cycles after that, so tap c reads stage
// cfg_w-K-2-c. Every cfg_w in [2K+1, W_MAX] is supported. The register
// shifts while en is high. Reset clears all stages.
module irb_shift_reg
  import trim_pkg::*;
#(
  parameter  int unsigned K     = 3,
  parameter  int unsigned W_MAX = 227,
  localparam int unsigned DEPTH = W_MAX - K - 1,
  localparam int unsigned CW    = $clog2(W_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [CW-1:0] cfg_w,   // ifmap width in use
  input  act_t          d,       // activation from the leftmost PE
  output act_t          taps [K] // tap c feeds PE column c of the row above
);
  act_t sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else if (en) begin
      sr[0] <= d;
      for (int unsigned i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
  end

  always_comb begin
    for (int c = 0; c < int'(K); c++) begin
      int idx;
      idx = int'(cfg_w) - int'(K) - 2 - c;
      if (idx < 0) idx = 0;
      if (idx > int'(DEPTH) - 1) idx = int'(DEPTH) - 1;
      taps[c] = sr[idx];
    end
  end
endmodule
