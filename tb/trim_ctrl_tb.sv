// trim_ctrl_tb: checks the schedule produced by the control logic.
//
// For the 8x8 ifmap of the paper's dataflow example the activation source
// of every PE is compared, cycle by cycle from cycle 6 to 13, with the
// sources shown in that example (memory, right-to-left, diagonal through a
// shift register, diagonal through a shadow register); cycle n of the
// example is n cycles after the first window is issued. The test also checks
// the weight-loading sequence (K cycles, kernel rows K-1..0), that every
// ifmap activation is requested exactly once, the number and order of the
// tagged outputs, and that a 13x11 run right after works as well.
module trim_ctrl_tb;
  import trim_pkg::*;

  localparam int K = 3;
  localparam int W_MAX = 16;
  localparam int H_MAX = 16;
  localparam int CW = $clog2(W_MAX + 1);
  localparam int CH = $clog2(H_MAX + 1);
  localparam int CK = $clog2(K);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [CW-1:0] cfg_w;
  logic [CH-1:0] cfg_h;
  logic busy, done, w_shift, sr_en, out_valid;
  logic [CW-1:0] cur_w, ext_x [K][K], out_x;
  logic [CH-1:0] ext_y [K][K], out_y;
  logic [CK-1:0] w_row;
  logic ext_ld [K][K];
  act_src_e pe_src [K][K];
  logic first_row [K-1], shd_en [K-1], shd_sel [K-1];

  trim_ctrl #(.K(K), .W_MAX(W_MAX), .H_MAX(H_MAX)) dut (.*);

  always #50 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  int issue0 = -1;
  int rd [H_MAX][W_MAX];
  int n_out, n_w;
  int cur_wv, cur_hv;

  // Sources from the example; E memory, R right, S shift register, Y shadow.
  // fig[cycle-6][row] is a 3-character string, column 0 first.
  string fig [8][3] = '{
    '{"RRE", "RRE", "RRE"},   // cycle 6
    '{"SSS", "RRE", "RRE"},   // cycle 7
    '{"RRS", "SSS", "RRE"},   // cycle 8
    '{"RRS", "RRS", "EEE"},   // cycle 9
    '{"RRS", "RRS", "RRE"},   // cycle 10
    '{"RRY", "RRS", "RRE"},   // cycle 11
    '{"RRY", "RRY", "RRE"},   // cycle 12
    '{"SSS", "RRY", "RRE"}    // cycle 13
  };

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (dut.st_v[0] && issue0 < 0) issue0 = cycle;
    if (w_shift && rst_n) begin
      checks++;
      if (int'(w_row) != K - 1 - n_w) begin failures++; $display("w_row %0d at load %0d", w_row, n_w); end
      n_w++;
    end
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        if (ext_ld[r][c]) rd[int'(ext_y[r][c])][int'(ext_x[r][c])]++;
    if (out_valid) begin
      checks++;
      if (int'(out_y) * (cur_wv - K + 1) + int'(out_x) != n_out) begin failures++; $display("out order %0d", n_out); end
      n_out++;
    end
    if (cur_wv == 8 && issue0 >= 0 && cycle - issue0 >= 6 && cycle - issue0 <= 13) begin
      int f;
      f = cycle - issue0 - 6;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          byte ch;
          act_src_e want;
          logic shadow;
          ch = fig[f][r][c];
          want = (ch == "E") ? SRC_EXT : (ch == "R") ? SRC_RIGHT : SRC_IRB;
          shadow = (c == K - 1 && r < K - 1) ? shd_sel[r] : 1'b0;
          checks++;
          if (pe_src[r][c] != want || (ch == "Y") != shadow) begin
            failures++;
            $display("cycle %0d PE(%0d,%0d): src %s shadow %0d, example says %c",
                     f + 6, r, c, pe_src[r][c].name(), shadow, ch);
          end
        end
    end
  end

  task automatic run(input int w, input int h);
    foreach (rd[y, x]) rd[y][x] = 0;
    n_out = 0; n_w = 0; issue0 = -1; cur_wv = w; cur_hv = h;
    @(posedge clk);
    start <= 1'b1; cfg_w <= CW'(w); cfg_h <= CH'(h);
    @(posedge clk);
    start <= 1'b0;
    @(posedge done);
    @(posedge clk);
    checks++; if (n_w != K) begin failures++; $display("%0d weight loads", n_w); end
    checks++; if (n_out != (w - K + 1) * (h - K + 1)) begin failures++; $display("%0d outputs", n_out); end
    checks++;
    begin
      int bad = 0;
      foreach (rd[y, x]) if (rd[y][x] != ((y < h && x < w) ? 1 : 0)) bad++;
      if (bad != 0) begin failures++; $display("%0d activations not fetched once", bad); end
    end
    checks++; if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    cfg_w = '0; cfg_h = '0; cur_wv = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(8, 8);
    run(13, 11);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
