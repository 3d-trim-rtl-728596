// trim_slice_tb: checks one K=3 slice on its own, the testbench acting as
// the control logic and the IRB.
//
// After K cycles of weight loading, windows of a random 9x7 ifmap are issued
// one per cycle in raster order, PE row r working on a window one cycle after
// row r-1. At the first window of each output row every PE loads from memory;
// afterwards PEs 0..K-2 of a row take the right neighbour's activation and the
// rightmost PE a new one. Where memory would be used for rows 0..K-2, the
// testbench picks the IRB input at random instead, supplying the correct
// value there and a wrong one from memory. Each result must leave the adder
// tree K+PE_LAT+TREE_LAT cycles after the window was issued, and equal the
// convolution computed here. Also checks the exported leftmost activations.
module trim_slice_tb;
  import trim_pkg::*;

  localparam int K = 3;
  localparam int W = 9;
  localparam int H = 7;
  localparam int WO = W - K + 1;
  localparam int HO = H - K + 1;
  localparam int NW = WO * HO;
  localparam int LAT = K + PE_LAT + TREE_LAT;

  logic clk = 1'b0, rst_n = 1'b0, w_shift = 1'b0;
  act_t a_ext [K][K];
  logic a_ext_ld [K][K];
  act_src_e src [K][K];
  act_t a_irb [K-1][K];
  wgt_t w_in [K];
  act_t a_left0 [K], a_edge [K];
  psum_t psum_out;

  trim_slice #(.K(K)) dut (.*);

  always #50 clk = ~clk;

  act_t ifm [H][W];
  wgt_t wk [K][K];
  int checks = 0, failures = 0, n_irb = 0, n_right = 0;

  function automatic psum_t conv(int n);
    psum_t s;
    int o, x;
    o = n / WO; x = n % WO;
    s = '0;
    for (int kr = 0; kr < K; kr++)
      for (int kc = 0; kc < K; kc++)
        s += psum_t'(ifm[o+kr][x+kc]) * psum_t'(wk[kr][kc]);
    return s;
  endfunction

  initial begin
    bit use_irb [NW+K+2][K][K];
    foreach (ifm[y, x]) ifm[y][x] = act_t'($urandom);
    foreach (wk[r, c]) wk[r][c] = wgt_t'($urandom);
    foreach (use_irb[n, r, c]) use_irb[n][r][c] = (r < K - 1) && ($urandom_range(1) == 1);
    foreach (a_ext[r, c]) begin a_ext[r][c] = '0; a_ext_ld[r][c] = 0; src[r][c] = SRC_EXT; end
    foreach (a_irb[r, c]) a_irb[r][c] = '0;
    foreach (w_in[c]) w_in[c] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // weights: bottom kernel row first
    for (int i = 0; i < K; i++) begin
      w_shift = 1'b1;
      foreach (w_in[c]) w_in[c] = wk[K-1-i][c];
      @(posedge clk); #1;
    end
    w_shift = 1'b0;
    // cycle T: PE row r fetches window T-r and uses window T-r-1
    for (int T = 0; T < NW + LAT + 2; T++) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          int nf, nu;
          nf = T - r; nu = T - r - 1;
          a_ext_ld[r][c] = 1'b0; a_ext[r][c] = '0; src[r][c] = SRC_EXT;
          if (r < K - 1) a_irb[r][c] = '0;
          if (nf >= 0 && nf < NW && ((nf % WO) == 0 || c == K - 1)) begin
            a_ext_ld[r][c] = 1'b1;
            a_ext[r][c] = use_irb[nf][r][c] ? act_t'(~ifm[nf/WO + r][nf%WO + c])
                                            : ifm[nf/WO + r][nf%WO + c];
          end
          if (nu >= 0 && nu < NW) begin
            if ((nu % WO) == 0 || c == K - 1) begin
              if (use_irb[nu][r][c]) begin
                src[r][c] = SRC_IRB;
                a_irb[r][c] = ifm[nu/WO + r][nu%WO + c];
                n_irb++;
              end
            end else begin
              src[r][c] = SRC_RIGHT;
              n_right++;
            end
          end
        end
      #1;
      if (T - LAT >= 0 && T - LAT < NW) begin
        checks++;
        if (psum_out != conv(T - LAT)) begin
          failures++;
          if (failures < 10) $display("window %0d: got %0d exp %0d", T - LAT, psum_out, conv(T - LAT));
        end
      end
      // a_left0[r] shows what PE(r,0) used in the previous cycle
      for (int r = 0; r < K; r++) begin
        int nu1;
        nu1 = T - r - 2;
        if (nu1 >= 0 && nu1 < NW) begin
          checks++;
          if (a_left0[r] != ifm[nu1/WO + r][nu1%WO]) failures++;
        end
      end
      @(posedge clk); #1;
    end
    checks++;
    if (n_irb == 0 || n_right == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
