// tb_synchronizer: self-checking test of the spike synchronizer.
//
// A spike shorter than a clock period is applied between two clock edges;
// the synchronizer must hold it and present it as a level at the next
// rising clock edge (one clock of latency), keep it until its clear input
// is pulled low, and stay low when no spike arrives. Random pulse positions
// and widths are tried. The one-clock latency follows the two-flip-flop
// structure of the paper's synchronizer figure.
module tb_synchronizer;
  logic clk = 1'b0, rst_n = 1'b1, spike = 1'b0, out;
  int checks = 0, failures = 0;

  synchronizer dut (.i_clk(clk), .i_rst_n(rst_n), .i_spike(spike), .o_spike(out));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2 rst_n = 1'b0;            // a falling edge, so the spike-clocked flop resets
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // no spike: output stays low
    repeat (5) @(posedge clk);
    #1 check(out == 1'b0, "idle output low");
    for (int n = 0; n < 40; n++) begin
      int unsigned d, w;
      d = 1 + $urandom_range(0, 1);   // offset after the falling edge
      w = 1 + $urandom_range(0, 1);   // pulse ends before the rising edge
      @(negedge clk);
      #(d) spike = 1'b1;
      #(w) spike = 1'b0;
      check(out == 1'b0, "not yet visible before the clock edge");
      @(posedge clk);
      #1 check(out == 1'b1, "caught at the next rising edge");
      repeat ($urandom_range(1, 4)) @(posedge clk);
      #1 check(out == 1'b1, "held until cleared");
      // clear pulse (the accumulator's o_clr in the synapse)
      rst_n = 1'b0;
      #2 check(out == 1'b0, "cleared asynchronously");
      rst_n = 1'b1;
      @(posedge clk);
      #1 check(out == 1'b0, "stays low after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
