// irb_shift_reg_tb: checks the reconfigurable shift register of the IRB.
//
// A numbered stream is shifted in and, for several ifmap widths, tap c must
// show the value that entered cfg_w-K-1-c edges earlier (stage 0 is loaded
// at the first edge). Holding en low must freeze the register.
module irb_shift_reg_tb;
  import trim_pkg::*;

  localparam int K = 3;
  localparam int W_MAX = 20;
  localparam int CW = $clog2(W_MAX + 1);

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [CW-1:0] cfg_w;
  act_t d;
  act_t taps [K];

  irb_shift_reg #(.K(K), .W_MAX(W_MAX)) dut (.*);

  always #50 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    d = '0; cfg_w = CW'(W_MAX);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    en = 1'b1;
    for (int t = 0; t < 300; t++) begin
      d = act_t'(t);
      @(posedge clk);
      #1;
      // value entered at edge t' sits in stage t-t'
      for (int w = 2 * K + 1; w <= W_MAX; w++) begin
        cfg_w = CW'(w);
        #1;
        for (int c = 0; c < K; c++) begin
          int age;
          age = w - K - 2 - c;
          if (t >= age) begin
            checks++;
            if (taps[c] != act_t'(t - age)) begin
              failures++;
              if (failures < 10) $display("w=%0d c=%0d t=%0d got %0d exp %0d", w, c, t, taps[c], act_t'(t - age));
            end
          end
        end
      end
      cfg_w = CW'(W_MAX);
    end
    // freeze
    en = 1'b0;
    cfg_w = CW'(9);
    #1;
    begin
      act_t held [K];
      held = taps;
      repeat (5) begin
        d = act_t'($urandom);
        @(posedge clk);
        #1;
        for (int c = 0; c < K; c++) begin
          checks++;
          if (taps[c] != held[c]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
