// adder_tree_tb: checks two adder trees, one with 3 inputs (the slice tree
// for K=3, not a power of two) and one with 8 (the top-level tree for P_I=8).
// Random psums are applied every cycle and each sum must appear exactly one
// cycle later.
module adder_tree_tb;
  import trim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  psum_t in3 [3], in8 [8];
  psum_t sum3, sum8;

  adder_tree #(.N(3)) dut3 (.clk, .rst_n, .in(in3), .sum(sum3));
  adder_tree #(.N(8)) dut8 (.clk, .rst_n, .in(in8), .sum(sum8));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    psum_t e3, e8;
    foreach (in3[i]) in3[i] = '0;
    foreach (in8[i]) in8[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      e3 = '0; e8 = '0;
      foreach (in3[i]) begin in3[i] = psum_t'($urandom) >>> $urandom_range(20); e3 += in3[i]; end
      foreach (in8[i]) begin in8[i] = psum_t'($urandom) >>> $urandom_range(20); e8 += in8[i]; end
      @(posedge clk);
      #1;
      checks += 2;
      if (sum3 != e3) begin failures++; $display("N=3 got %0d exp %0d", sum3, e3); end
      if (sum8 != e8) begin failures++; $display("N=8 got %0d exp %0d", sum8, e8); end
    end
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
