// trim3d_full_tb: the accelerator at its default size (8 cores x 8 slices,
// 576 PEs, ifmaps up to 227 wide) running tiles of the CNN layers used to
// evaluate the architecture.
//
//  1. VGG-16, a 14x14 layer with 3x3 kernels: 8 input channels x 8 filters
//     of the 14x14x512 layer, zero-padded by one pixel (16x16 ifmap).
//  2. AlexNet, the 27x27 layer with 5x5 kernels, through kernel tiling: each
//     5x5 kernel is zero-extended to 6x6 and cut into four 3x3 sub-kernels;
//     sub-kernel (dy,dx) goes to its own core, which reads the ifmap shifted
//     by (dy,dx). Two input channels x four sub-kernels fill the 8 cores and
//     the adder trees sum the sub-kernel psums. The padded ifmap is 31x31;
//     the first 27x27 outputs are the 5x5 convolution, checked against a
//     direct 5x5 convolution.
//  3. VGG-16, the first layer (224x224, 3 input channels), padded to
//     226x226: the widest shift-register setting; unused cores get zeros.
// Every ofmap value is compared with a reference computed here; each run
// also checks that every ifmap activation is fetched once per core stream
// and that the output rate is one value per filter per cycle.
module trim3d_full_tb;
  import trim_pkg::*;

  localparam int P_I = 8;
  localparam int P_O = 8;
  localparam int K = 3;
  localparam int W_MAX = 227;
  localparam int H_MAX = 227;
  localparam int CW = $clog2(W_MAX + 1);
  localparam int CH = $clog2(H_MAX + 1);
  localparam int CK = $clog2(K);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
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

  trim3d_top dut (.*);

  always #5 clk = ~clk;

  // What each core sees: its own ifmap and kernels (after any tiling).
  act_t cif [P_I][H_MAX][W_MAX];
  wgt_t cwk [P_I][P_O][K][K];
  // Layer data for the tiled 5x5 case.
  act_t ifm5 [2][31][31];
  wgt_t wk5 [2][P_O][5][5];

  always_comb begin
    for (int i = 0; i < P_I; i++)
      for (int j = 0; j < P_O; j++)
        for (int c = 0; c < K; c++)
          w_data[i][j][c] = (int'(w_row) < K) ? cwk[i][j][w_row][c] : '0;
    for (int i = 0; i < P_I; i++)
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          if_data[i][r][c] = (int'(if_y[r][c]) < H_MAX && int'(if_x[r][c]) < W_MAX)
                             ? cif[i][if_y[r][c]][if_x[r][c]] : '0;
  end

  int checks = 0, failures = 0, cycle = 0;
  int mode;            // 0: 3x3 reference over the cores, 1: direct 5x5
  int cur_w, cur_h, n_out, first_out, last_out, n_rd;
  bit done_seen;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        if (if_rd[r][c]) n_rd++;
    if (done) done_seen = 1;
    if (ofmap_valid) begin
      int y, x;
      y = int'(ofmap_y); x = int'(ofmap_x);
      if (n_out == 0) first_out = cycle;
      last_out = cycle;
      n_out++;
      if (mode == 0 || (y < 27 && x < 27))
        for (int j = 0; j < P_O; j++) begin
          psum_t e;
          e = '0;
          if (mode == 0) begin
            for (int i = 0; i < P_I; i++)
              for (int kr = 0; kr < K; kr++)
                for (int kc = 0; kc < K; kc++)
                  e += psum_t'(cif[i][y+kr][x+kc]) * psum_t'(cwk[i][j][kr][kc]);
          end else begin
            for (int ch = 0; ch < 2; ch++)
              for (int kr = 0; kr < 5; kr++)
                for (int kc = 0; kc < 5; kc++)
                  e += psum_t'(ifm5[ch][y+kr][x+kc]) * psum_t'(wk5[ch][j][kr][kc]);
          end
          checks++;
          if (ofmap[j] != e) begin
            failures++;
            if (failures < 10) $display("mode %0d (%0d,%0d) f%0d: got %0d exp %0d", mode, y, x, j, ofmap[j], e);
          end
        end
    end
  end

  task automatic run(input int w, input int h, input string name);
    n_out = 0; n_rd = 0; done_seen = 0; cur_w = w; cur_h = h;
    @(posedge clk);
    start <= 1'b1; cfg_w <= CW'(w); cfg_h <= CH'(h);
    @(posedge clk);
    start <= 1'b0;
    wait (done_seen);
    @(posedge clk);
    checks++;
    if (n_out != (w - K + 1) * (h - K + 1) || last_out - first_out + 1 != n_out) begin
      failures++;
      $display("%s: %0d outputs over %0d cycles", name, n_out, last_out - first_out + 1);
    end
    checks++;
    if (n_rd != w * h) begin
      failures++;
      $display("%s: %0d fetches for %0d activations", name, n_rd, w * h);
    end
    $display("%s: %0dx%0d ifmap, %0d outputs per filter, %0d fetches, %0d MACs per cycle",
             name, w, h, n_out, n_rd, P_I * P_O * K * K);
  endtask

  function automatic act_t rnd_act();
    return act_t'($urandom);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;

    // 1. VGG-16 14x14 layer tile, pad 1
    mode = 0;
    foreach (cif[i, y, x]) cif[i][y][x] = '0;
    for (int i = 0; i < P_I; i++)
      for (int y = 1; y <= 14; y++)
        for (int x = 1; x <= 14; x++) cif[i][y][x] = rnd_act();
    foreach (cwk[i, j, r, c]) cwk[i][j][r][c] = wgt_t'($urandom);
    run(16, 16, "VGG-16 (14,512,512,3) tile");

    // 2. AlexNet (27,48,256,5) tile through kernel tiling, pad 2
    mode = 1;
    foreach (ifm5[ch, y, x])
      ifm5[ch][y][x] = (y >= 2 && y < 29 && x >= 2 && x < 29) ? rnd_act() : '0;
    foreach (wk5[ch, j, r, c]) wk5[ch][j][r][c] = wgt_t'($urandom);
    foreach (cif[i, y, x]) cif[i][y][x] = '0;
    for (int i = 0; i < P_I; i++) begin
      int ch, dy, dx;
      ch = i / 4; dy = 3 * ((i / 2) % 2); dx = 3 * (i % 2);
      for (int y = 0; y < 31; y++)
        for (int x = 0; x < 31; x++)
          cif[i][y][x] = (y + dy < 31 && x + dx < 31) ? ifm5[ch][y+dy][x+dx] : '0;
      for (int j = 0; j < P_O; j++)
        for (int r = 0; r < K; r++)
          for (int c = 0; c < K; c++)
            cwk[i][j][r][c] = (dy + r < 5 && dx + c < 5) ? wk5[ch][j][dy+r][dx+c] : '0;
    end
    run(31, 31, "AlexNet (27,48,256,5) tile, 5x5 as four 3x3");

    // 3. VGG-16 first layer, 3 channels, pad 1
    mode = 0;
    foreach (cif[i, y, x])
      cif[i][y][x] = (i < 3 && y >= 1 && y <= 224 && x >= 1 && x <= 224) ? rnd_act() : '0;
    foreach (cwk[i, j, r, c]) cwk[i][j][r][c] = (i < 3) ? wgt_t'($urandom) : '0;
    run(226, 226, "VGG-16 (224,3,64,3) tile");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
