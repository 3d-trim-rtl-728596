// trim_ctrl: control logic of 3D-TrIM, shared by every core and slice.
//
// The paper says the control logic drives the multiplexer selects of the
// slices, the choice of shift-register taps and the activity of the shadow
// registers; how it does so is this design's own. One convolution runs as:
// start latches the ifmap size (cfg_w x cfg_h, stride 1, no padding); K
// cycles of weight loading follow (w_shift high, w_row = K-1 down to 0 names
// the kernel row memory must present at the top of every slice); then one
// window per cycle is issued in raster order, (H-K+1) x (W-K+1) windows with
// no bubbles, and done pulses when the last ofmap value has left the
// adder trees.
//
// A window issued at cycle t (stage 0) is multiplied by PE row r at t+r+1,
// the skew that lets psums flow down. Stage s of a small pipeline holds
// (valid, output row o, output column x) of the window issued s cycles ago;
// every select is a function of one stage:
//  * memory fetch for PE row r (stage r, one cycle ahead of use): all K PEs
//    at the first window of an output row, the rightmost PE otherwise, but
//    only for the bottom PE row or the first output row. So each ifmap
//    activation is fetched exactly once.
//  * source of PE(r,c) (stage r+1): first window: memory or IRB as above;
//    later windows: right neighbour for c<K-1, memory or IRB for c=K-1.
//  * shadow chain r shifts while PE row r+1 is in its last K windows
//    (stage r+2) and feeds PE(r,K-1) in the last K-1 windows of output rows
//    after the first (stage r+1).
// out_valid, out_y and out_x tag the ofmap value leaving the top-level adder
// trees, K+PE_LAT+2*TREE_LAT cycles after issue. Requires 2K+1 <= cfg_w <=
// W_MAX and K <= cfg_h <= H_MAX; a start outside this range is ignored.
// The bottom PE row never takes the IRB input and its rightmost PE never the
// right neighbour, so a few bits of pe_src for that row are constant.
module trim_ctrl
  import trim_pkg::*;
#(
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
  output logic [CW-1:0] cur_w,                  // latched ifmap width
  // weight loading
  output logic          w_shift,
  output logic [CK-1:0] w_row,
  // ifmap fetch, one request per PE position, shared by all cores
  output logic          ext_ld    [K][K],
  output logic [CH-1:0] ext_y     [K][K],
  output logic [CW-1:0] ext_x     [K][K],
  // slice and IRB control
  output act_src_e      pe_src    [K][K],
  output logic          sr_en,
  output logic          first_row [K-1],
  output logic          shd_en    [K-1],
  output logic          shd_sel   [K-1],
  // ofmap tagging
  output logic          out_valid,
  output logic [CH-1:0] out_y,
  output logic [CW-1:0] out_x
);
  localparam int unsigned OUT_ST = K + PE_LAT + 2 * TREE_LAT;

  typedef enum logic [1:0] {S_IDLE, S_LOAD_W, S_RUN, S_DRAIN} state_e;

  state_e        state;
  logic [CW-1:0] w_q;
  logic [CH-1:0] h_q;
  logic [CK-1:0] wcnt;
  logic [CH-1:0] o_cnt;
  logic [CW-1:0] x_cnt;
  logic          last_win;
  logic          pipe_busy;

  logic          st_v [OUT_ST+1];
  logic [CH-1:0] st_o [OUT_ST+1];
  logic [CW-1:0] st_x [OUT_ST+1];

  wire cfg_ok = (int'(cfg_w) >= 2 * int'(K) + 1) && (int'(cfg_w) <= int'(W_MAX)) &&
                (int'(cfg_h) >= int'(K)) && (int'(cfg_h) <= int'(H_MAX));

  assign last_win = (int'(x_cnt) == int'(w_q) - int'(K)) &&
                    (int'(o_cnt) == int'(h_q) - int'(K));

  // Stage 0 is the window issued in this cycle.
  always_comb begin
    st_v[0] = (state == S_RUN);
    st_o[0] = o_cnt;
    st_x[0] = x_cnt;
    pipe_busy = 1'b0;
    for (int s = 1; s <= int'(OUT_ST); s++) pipe_busy |= st_v[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      w_q   <= CW'(2 * K + 1);
      h_q   <= CH'(K);
      wcnt  <= '0;
      o_cnt <= '0;
      x_cnt <= '0;
      done  <= 1'b0;
      for (int s = 1; s <= int'(OUT_ST); s++) begin
        st_v[s] <= 1'b0;
        st_o[s] <= '0;
        st_x[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      for (int s = 1; s <= int'(OUT_ST); s++) begin
        st_v[s] <= st_v[s-1];
        st_o[s] <= st_o[s-1];
        st_x[s] <= st_x[s-1];
      end
      unique case (state)
        S_IDLE: if (start && cfg_ok) begin
          w_q   <= cfg_w;
          h_q   <= cfg_h;
          wcnt  <= '0;
          state <= S_LOAD_W;
        end
        S_LOAD_W: begin
          wcnt <= wcnt + 1'b1;
          if (int'(wcnt) == int'(K) - 1) begin
            o_cnt <= '0;
            x_cnt <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          if (last_win) begin
            state <= S_DRAIN;
          end else if (int'(x_cnt) == int'(w_q) - int'(K)) begin
            x_cnt <= '0;
            o_cnt <= o_cnt + 1'b1;
          end else begin
            x_cnt <= x_cnt + 1'b1;
          end
        end
        S_DRAIN: if (!pipe_busy) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy    = (state != S_IDLE);
  assign cur_w   = w_q;
  assign w_shift = (state == S_LOAD_W);
  assign w_row   = CK'(int'(K) - 1 - int'(wcnt));
  assign sr_en   = busy;

  always_comb begin
    for (int r = 0; r < int'(K); r++) begin
      // PE row r takes new activations from memory in this output row?
      logic from_mem_f, from_mem_u;
      from_mem_f = (r == int'(K) - 1) || (st_o[r] == '0);
      from_mem_u = (r == int'(K) - 1) || (st_o[r+1] == '0);
      for (int c = 0; c < int'(K); c++) begin
        ext_ld[r][c] = st_v[r] && from_mem_f && ((st_x[r] == '0) || (c == int'(K) - 1));
        ext_y[r][c]  = CH'(int'(st_o[r]) + r);
        ext_x[r][c]  = CW'(int'(st_x[r]) + c);
        if (!st_v[r+1])
          pe_src[r][c] = SRC_EXT;
        else if ((st_x[r+1] == '0) || (c == int'(K) - 1))
          pe_src[r][c] = from_mem_u ? SRC_EXT : SRC_IRB;
        else
          pe_src[r][c] = SRC_RIGHT;
      end
    end
    for (int r = 0; r < int'(K) - 1; r++) begin
      first_row[r] = st_v[r+2] && (st_o[r+2] == '0);
      shd_en[r]    = st_v[r+2] && (int'(st_x[r+2]) >= int'(w_q) - 2 * int'(K) + 1);
      shd_sel[r]   = st_v[r+1] && (st_o[r+1] != '0) &&
                     (int'(st_x[r+1]) >= int'(w_q) - 2 * int'(K) + 2);
    end
  end

  assign out_valid = st_v[OUT_ST];
  assign out_y     = st_o[OUT_ST];
  assign out_x     = st_x[OUT_ST];

  // The window pipeline must never be fed while the weights are loading.
  assert property (@(posedge clk) !(w_shift && st_v[0]));

  // Every ifmap fetch must fall inside the ifmap being processed, and no
  // fetch or output may happen outside a run.
  for (genvar r = 0; r < K; r++) begin : g_fetch_chk
    for (genvar c = 0; c < K; c++) begin : g_col
      assert property (@(posedge clk)
        ext_ld[r][c] |-> (busy && int'(ext_y[r][c]) < int'(h_q) && int'(ext_x[r][c]) < int'(w_q)));
    end
  end
  assert property (@(posedge clk) out_valid |-> busy);
endmodule
