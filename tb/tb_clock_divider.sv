// tb_clock_divider: self-checking test of the layer clock generator.
//
// With the defaults (first-layer clock = system clock / 20, second-layer
// clock = first-layer clock / 2; 50 MHz -> 2.5 MHz and 1.25 MHz) and with
// the ratio 4 used for the Iris network, the test measures on the system
// clock: the period and high time of each layer clock, and that every
// rising edge of the slower clock falls on a rising edge of the faster one
// (so spikes between the layers are never cut). Ratio 1 must give two
// identical clocks.
module tb_clock_divider;
  logic clk = 1'b0, rst_n = 1'b1;
  logic l1, l2, l1b, l2b, l1c, l2c;
  int checks = 0, failures = 0;

  clock_divider dut (.i_clk(clk), .i_rst_n(rst_n), .o_clk_l1(l1), .o_clk_l2(l2));
  clock_divider #(.DIV_L1(20), .RATIO_L2(4)) dut4 (.i_clk(clk), .i_rst_n(rst_n), .o_clk_l1(l1b), .o_clk_l2(l2b));
  clock_divider #(.DIV_L1(6), .RATIO_L2(1)) dut1 (.i_clk(clk), .i_rst_n(rst_n), .o_clk_l1(l1c), .o_clk_l2(l2c));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  int r1[$], r2[$], r4a[$], r4b[$], f1[$];
  logic l1_d = 0, l2_d = 0, l1b_d = 0, l2b_d = 0;
  bit run = 0;
  always @(posedge clk) begin
    #1;
    if (run) begin
      cyc++;
      if (l1 && !l1_d)   r1.push_back(cyc);
      if (!l1 && l1_d)   f1.push_back(cyc);
      if (l2 && !l2_d)   begin r2.push_back(cyc);  check(l1 && !l1_d, "slow edge on a fast edge (ratio 2)"); end
      if (l1b && !l1b_d) r4a.push_back(cyc);
      if (l2b && !l2b_d) begin r4b.push_back(cyc); check(l1b && !l1b_d, "slow edge on a fast edge (ratio 4)"); end
      check(l1c == l2c, "ratio 1: identical clocks");
    end
    l1_d = l1; l2_d = l2; l1b_d = l1b; l2b_d = l2b;
  end

  initial begin
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run = 1;
    repeat (1000) @(posedge clk);
    run = 0;
    check(r1.size() >= 45, "clk_l1 toggles");
    for (int i = 1; i < r1.size(); i++)  check(r1[i] - r1[i-1] == 20, "clk_l1 period 20");
    for (int i = 0; i < f1.size(); i++)
      if (i < r1.size() && f1[i] > r1[i]) check(f1[i] - r1[i] == 10, "clk_l1 high for 10");
    check(r2.size() >= 20, "clk_l2 toggles");
    for (int i = 1; i < r2.size(); i++)  check(r2[i] - r2[i-1] == 40, "clk_l2 period 40");
    for (int i = 1; i < r4a.size(); i++) check(r4a[i] - r4a[i-1] == 20, "ratio-4 clk_l1 period 20");
    check(r4b.size() >= 10, "ratio-4 clk_l2 toggles");
    for (int i = 1; i < r4b.size(); i++) check(r4b[i] - r4b[i-1] == 80, "ratio-4 clk_l2 period 80");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
