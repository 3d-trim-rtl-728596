// trim3d_top_tb: end-to-end test of the 3D-TrIM accelerator at a reduced
// size (2 cores x 2 slices, ifmaps up to 16 wide).
//
// The testbench models the ifmap and weight memories, runs convolutions on
// random signed data for several ifmap sizes (including the 8x8 case of the
// paper's dataflow example and a change of width between runs, which
// exercises the reconfigurable shift-register taps) and compares every
// ofmap value with a convolution computed here. It also checks that every
// ifmap activation is fetched exactly once, that one ofmap value per filter
// leaves the array every cycle with no gaps, the latency from start to the
// first value, and counts how often each activation path was taken: memory,
// right-to-left, diagonal through a shift register, diagonal through a
// shadow register, shadow-to-shadow transfer and weight loading. A path
// that never occurs counts as a failure.
module trim3d_top_tb;
  import trim_pkg::*;

  localparam int P_I   = 2;
  localparam int P_O   = 2;
  localparam int K     = 3;
  localparam int W_MAX = 16;
  localparam int H_MAX = 16;
  localparam int CW    = $clog2(W_MAX + 1);
  localparam int CH    = $clog2(H_MAX + 1);
  localparam int CK    = $clog2(K);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [CW-1:0] cfg_w = '0;
  logic [CH-1:0] cfg_h = '0;
  logic busy, done, w_shift;
  logic [CK-1:0] w_row;
  wgt_t  w_data [P_I][P_O][K];
  logic  if_rd [K][K];
  logic [CH-1:0] if_y [K][K];
  logic [CW-1:0] if_x [K][K];
  act_t  if_data [P_I][K][K];
  logic  ofmap_valid;
  logic [CH-1:0] ofmap_y;
  logic [CW-1:0] ofmap_x;
  psum_t ofmap [P_O];

  trim3d_top #(.P_I(P_I), .P_O(P_O), .K(K), .W_MAX(W_MAX), .H_MAX(H_MAX)) dut (.*);

  always #5 clk = ~clk;

  // memories
  act_t ifm [P_I][H_MAX][W_MAX];
  wgt_t wk  [P_I][P_O][K][K];
  int   rd_cnt [H_MAX][W_MAX];

  always_comb begin
    for (int i = 0; i < P_I; i++)
      for (int j = 0; j < P_O; j++)
        for (int c = 0; c < K; c++)
          w_data[i][j][c] = (int'(w_row) < K) ? wk[i][j][w_row][c] : '0;
    for (int i = 0; i < P_I; i++)
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          if_data[i][r][c] = (int'(if_y[r][c]) < H_MAX && int'(if_x[r][c]) < W_MAX)
                             ? ifm[i][int'(if_y[r][c])][int'(if_x[r][c])] : '0;
  end

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_wload = 0, n_ext = 0, n_right = 0, n_irb_sr = 0, n_irb_shadow = 0;
  int n_shadow_fwd = 0, n_reconfig = 0;

  // per-run monitor
  int cur_w, cur_h, n_out, first_out, last_out, start_cycle, done_cycle;
  bit bad_out;

  always @(posedge clk) if (rst_n) begin
    if (w_shift) n_wload++;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        if (if_rd[r][c]) begin
          n_ext++;
          if (int'(if_y[r][c]) < cur_h && int'(if_x[r][c]) < cur_w)
            rd_cnt[int'(if_y[r][c])][int'(if_x[r][c])]++;
          else bad_out = 1;
        end
        if (dut.pe_src[r][c] == SRC_RIGHT) n_right++;
        if (dut.pe_src[r][c] == SRC_IRB) begin
          if (c == K - 1 && r < K - 1 && dut.shd_sel[r]) n_irb_shadow++;
          else n_irb_sr++;
        end
      end
    for (int r = 0; r < K - 2; r++)
      if (dut.shd_en[r] && !dut.first_row[r]) n_shadow_fwd++;
    if (ofmap_valid) begin
      if (n_out == 0) first_out = cycle;
      last_out = cycle;
      n_out++;
      for (int j = 0; j < P_O; j++) begin
        psum_t exp_v;
        exp_v = '0;
        for (int i = 0; i < P_I; i++)
          for (int kr = 0; kr < K; kr++)
            for (int kc = 0; kc < K; kc++)
              exp_v += psum_t'(ifm[i][int'(ofmap_y)+kr][int'(ofmap_x)+kc]) * psum_t'(wk[i][j][kr][kc]);
        checks++;
        if (ofmap[j] !== exp_v) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH w=%0d y=%0d x=%0d f=%0d got %0d exp %0d",
                     cur_w, ofmap_y, ofmap_x, j, ofmap[j], exp_v);
        end
      end
      // raster order
      checks++;
      if (int'(ofmap_y) * (cur_w - K + 1) + int'(ofmap_x) != n_out - 1) begin
        failures++;
        $display("ORDER y=%0d x=%0d n=%0d", ofmap_y, ofmap_x, n_out - 1);
      end
    end
    if (done) done_cycle = cycle;
  end

  task automatic run_conv(input int w, input int h);
    int wo, ho, lat;
    wo = w - K + 1;
    ho = h - K + 1;
    for (int i = 0; i < P_I; i++)
      for (int y = 0; y < H_MAX; y++)
        for (int x = 0; x < W_MAX; x++)
          ifm[i][y][x] = act_t'($urandom_range(255));
    for (int i = 0; i < P_I; i++)
      for (int j = 0; j < P_O; j++)
        for (int kr = 0; kr < K; kr++)
          for (int kc = 0; kc < K; kc++)
            wk[i][j][kr][kc] = wgt_t'($urandom_range(255));
    for (int y = 0; y < H_MAX; y++)
      for (int x = 0; x < W_MAX; x++) rd_cnt[y][x] = 0;
    if (w != cur_w) n_reconfig++;
    cur_w = w; cur_h = h; n_out = 0; bad_out = 0; done_cycle = -1;
    @(posedge clk);
    start <= 1'b1;
    cfg_w <= CW'(w);
    cfg_h <= CH'(h);
    @(posedge clk);
    start_cycle = cycle;
    start <= 1'b0;
    wait (done_cycle >= 0);
    @(posedge clk);
    // every output of every filter, checked above
    checks++;
    if (n_out != wo * ho) begin
      failures++;
      $display("COUNT w=%0d h=%0d got %0d exp %0d", w, h, n_out, wo * ho);
    end
    // one window per cycle, no bubbles
    checks++;
    if (last_out - first_out + 1 != wo * ho) begin
      failures++;
      $display("RATE w=%0d: span %0d for %0d outputs", w, last_out - first_out + 1, wo * ho);
    end
    // latency: K weight-load cycles, then issue, then K + PE_LAT + 2*TREE_LAT
    lat = first_out - start_cycle;
    checks++;
    if (lat != 2 * K + PE_LAT + 2 * TREE_LAT + 1) begin
      failures++;
      $display("LATENCY w=%0d: %0d", w, lat);
    end
    // each activation fetched from memory exactly once
    checks++;
    begin
      int bad;
      bad = bad_out ? 1 : 0;
      for (int y = 0; y < H_MAX; y++)
        for (int x = 0; x < W_MAX; x++)
          if (rd_cnt[y][x] != ((y < h && x < w) ? 1 : 0)) bad++;
      if (bad != 0) begin
        failures++;
        $display("FETCH w=%0d h=%0d: %0d activations fetched other than once", w, h, bad);
      end
    end
    $display("run %0dx%0d: %0d outputs per filter, latency %0d cycles", w, h, n_out, lat);
  endtask

  initial begin
    cur_w = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run_conv(8, 8);
    run_conv(11, 9);
    run_conv(7, 3);
    run_conv(16, 16);
    run_conv(8, 8);
    $display("paths: weight-load %0d, memory %0d, right %0d, shift-reg %0d, shadow %0d, shadow-fwd %0d, width-changes %0d",
             n_wload, n_ext, n_right, n_irb_sr, n_irb_shadow, n_shadow_fwd, n_reconfig);
    checks++; if (n_wload == 0)      begin failures++; $display("never: weight load"); end
    checks++; if (n_ext == 0)        begin failures++; $display("never: memory fetch"); end
    checks++; if (n_right == 0)      begin failures++; $display("never: right-to-left"); end
    checks++; if (n_irb_sr == 0)     begin failures++; $display("never: shift-register reuse"); end
    checks++; if (n_irb_shadow == 0) begin failures++; $display("never: shadow reuse"); end
    checks++; if (n_shadow_fwd == 0) begin failures++; $display("never: shadow forward"); end
    checks++; if (n_reconfig < 2)    begin failures++; $display("never: width change"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
