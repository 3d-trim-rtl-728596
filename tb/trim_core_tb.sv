// trim_core_tb: checks one core (3 slices sharing one IRB) driven by the
// control logic, with the testbench as ifmap and weight memory.
//
// Random ifmaps of several sizes are convolved with a different random
// kernel in each slice; every psum a slice produces is compared with the
// convolution computed here. The slice psum leaves the core one cycle before
// the control logic's output tag (which accounts for the top-level adder
// tree), so the testbench delays it by one cycle before comparing. Slices 1
// and 2 get their diagonal activations only through the IRB filled by slice
// 0, so correct results there show the buffer sharing works.
module trim_core_tb;
  import trim_pkg::*;

  localparam int K = 3;
  localparam int P_O = 3;
  localparam int W_MAX = 12;
  localparam int H_MAX = 12;
  localparam int CW = $clog2(W_MAX + 1);
  localparam int CH = $clog2(H_MAX + 1);
  localparam int CK = $clog2(K);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [CW-1:0] cfg_w, cur_w, ext_x [K][K], out_x;
  logic [CH-1:0] cfg_h, ext_y [K][K], out_y;
  logic busy, done, w_shift, sr_en, out_valid;
  logic [CK-1:0] w_row;
  logic ext_ld [K][K];
  act_src_e pe_src [K][K];
  logic first_row [K-1], shd_en [K-1], shd_sel [K-1];
  act_t a_ext [K][K];
  wgt_t w_in [P_O][K];
  psum_t psum_out [P_O], psum_d [P_O];

  trim_ctrl #(.K(K), .W_MAX(W_MAX), .H_MAX(H_MAX)) u_ctrl (.*);

  trim_core #(.K(K), .P_O(P_O), .W_MAX(W_MAX)) dut (
    .clk, .rst_n, .cfg_w(cur_w), .a_ext, .a_ext_ld(ext_ld), .src(pe_src),
    .w_in, .w_shift, .sr_en, .first_row, .shd_en, .shd_sel, .psum_out
  );

  always #50 clk = ~clk;

  act_t ifm [H_MAX][W_MAX];
  wgt_t wk [P_O][K][K];

  always_comb begin
    for (int j = 0; j < P_O; j++)
      for (int c = 0; c < K; c++) w_in[j][c] = (int'(w_row) < K) ? wk[j][w_row][c] : '0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        a_ext[r][c] = (int'(ext_y[r][c]) < H_MAX && int'(ext_x[r][c]) < W_MAX)
                      ? ifm[ext_y[r][c]][ext_x[r][c]] : '0;
  end

  int checks = 0, failures = 0, n_out = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      for (int j = 0; j < P_O; j++) begin
        psum_t e;
        e = '0;
        for (int kr = 0; kr < K; kr++)
          for (int kc = 0; kc < K; kc++)
            e += psum_t'(ifm[int'(out_y)+kr][int'(out_x)+kc]) * psum_t'(wk[j][kr][kc]);
        checks++;
        if (psum_d[j] != e) begin
          failures++;
          if (failures < 10) $display("slice %0d (%0d,%0d): got %0d exp %0d", j, out_y, out_x, psum_d[j], e);
        end
      end
    end
    psum_d = psum_out;
  end

  task automatic run(input int w, input int h);
    foreach (ifm[y, x]) ifm[y][x] = act_t'($urandom);
    foreach (wk[j, r, c]) wk[j][r][c] = wgt_t'($urandom);
    n_out = 0;
    @(posedge clk);
    start <= 1'b1; cfg_w <= CW'(w); cfg_h <= CH'(h);
    @(posedge clk);
    start <= 1'b0;
    @(posedge done);
    @(posedge clk);
    checks++;
    if (n_out != (w - K + 1) * (h - K + 1)) begin failures++; $display("%0d outputs", n_out); end
  endtask

  initial begin
    cfg_w = '0; cfg_h = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    run(8, 8);
    run(12, 10);
    run(7, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
