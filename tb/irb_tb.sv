// irb_tb: checks the Input Recycling Buffer with K=3 and a 10-wide ifmap.
//
// A numbered stream enters each shift register every cycle; at every cycle
// the diagonal outputs of columns 0..K-2 must equal the values that entered
// cfg_w-K-1-c cycles before, and column K-1 the same unless its shadow chain
// is selected. Directed sequences then fill the bottom shadow chain from the
// bottom-right A register, fill the upper chain from the A register (first
// output row) and from the lower chain (later rows, the shadow-to-shadow
// move of the paper's example), and read both back oldest first.
module irb_tb;
  import trim_pkg::*;

  localparam int K = 3;
  localparam int W_MAX = 12;
  localparam int CW = $clog2(W_MAX + 1);
  localparam int W = 10;

  logic clk = 1'b0, rst_n = 1'b0, sr_en = 1'b0;
  logic [CW-1:0] cfg_w = CW'(W);
  act_t a_from_slice [K-1];
  act_t a_edge [K-1];
  logic first_row [K-1], shd_en [K-1], shd_sel [K-1];
  act_t to_pe [K-1][K];

  irb #(.K(K), .W_MAX(W_MAX)) dut (.*);

  always #50 clk = ~clk;

  int checks = 0, failures = 0;
  int t = 0;
  act_t hist [K-1][$];   // hist[r][0] = newest value shifted in

  task automatic expect_eq(input string what, input act_t got, input act_t exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("%s: got %0h exp %0h (t=%0d)", what, got, exp_v, t);
    end
  endtask

  // check the shift-register taps, then clock once
  task automatic step();
    #1;
    for (int r = 0; r < K - 1; r++)
      for (int c = 0; c < K; c++) begin
        int age;
        age = W - K - 2 - c;
        if (hist[r].size() > age && !(c == K - 1 && shd_sel[r]))
          expect_eq($sformatf("tap r%0d c%0d", r, c), to_pe[r][c], hist[r][age]);
      end
    @(posedge clk);
    for (int r = 0; r < K - 1; r++) hist[r].push_front(a_from_slice[r]);
    #1;
    t++;
    for (int r = 0; r < K - 1; r++) a_from_slice[r] = act_t'(t + 40 * r);
  endtask

  task automatic idle_ctl();
    for (int r = 0; r < K - 1; r++) begin
      first_row[r] = 1'b0; shd_en[r] = 1'b0; shd_sel[r] = 1'b0;
    end
  endtask

  initial begin
    idle_ctl();
    for (int r = 0; r < K - 1; r++) begin a_from_slice[r] = '0; a_edge[r] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    sr_en = 1'b1;
    repeat (12) step();

    // upper chain (r=0) from the A register of PE(1,2), first output row
    first_row[0] = 1'b1; shd_en[0] = 1'b1;
    a_edge[0] = 8'h21; step();
    a_edge[0] = 8'h22; step();
    idle_ctl();
    // bottom chain (r=1) from the A register of PE(2,2)
    shd_en[1] = 1'b1;
    a_edge[1] = 8'h31; step();
    a_edge[1] = 8'h32; step();
    idle_ctl();
    repeat (2) step();
    shd_sel[0] = 1'b1; shd_sel[1] = 1'b1; #1;
    expect_eq("upper oldest", to_pe[0][K-1], 8'h21);
    expect_eq("lower oldest", to_pe[1][K-1], 8'h31);
    // read back with shifting: both chains move on
    shd_en[0] = 1'b1; shd_en[1] = 1'b1;
    a_edge[1] = 8'h33;
    // upper chain now captures the lower chain's output (not first row)
    first_row[0] = 1'b0;
    step();
    expect_eq("upper second", to_pe[0][K-1], 8'h22);
    expect_eq("lower second", to_pe[1][K-1], 8'h32);
    a_edge[1] = 8'h34;
    step();
    // upper chain holds, oldest first, 31 then 32, moved up from the lower chain
    shd_en[1] = 1'b0;
    expect_eq("moved up 1", to_pe[0][K-1], 8'h31);
    step();
    shd_en[0] = 1'b0;
    expect_eq("moved up 2", to_pe[0][K-1], 8'h32);
    expect_eq("lower new", to_pe[1][K-1], 8'h33);
    step();
    idle_ctl();
    repeat (12) step();
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
