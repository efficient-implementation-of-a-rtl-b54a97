// tb_spike_generator: self-checking test of the spike generator.
//
// The trigger from the comparator is sampled on the falling clock edge and
// turned into a spike at the following rising edge; the spike lasts one
// clock, because it clears the sampling flip-flop. A low spike-enable
// suppresses output. Checks: latency of half a clock from the falling edge
// (one clock from when the trigger is raised after a rising edge), a
// single-clock spike for a trigger held several clocks only while enable is
// high, the second spike of a held trigger, and suppression when disabled.
module tb_spike_generator;
  logic clk = 1'b0, rst_n = 1'b1, trig = 1'b0, en = 1'b0, spk;
  int checks = 0, failures = 0;
  int nspk = 0;

  spike_generator dut (.i_clk(clk), .i_rst_n(rst_n), .i_trigger(trig),
                       .i_spike_enable(en), .o_spike_out(spk));

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

  always @(posedge clk) #1 if (spk) nspk++;

  initial begin
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(spk == 1'b0, "reset: no spike");
    // enabled, trigger raised just after a rising edge
    en = 1'b1;
    trig = 1'b1;
    @(posedge clk); #1 check(spk == 1'b1, "spike one clock after trigger");
    trig = 1'b0;   // the window logic drops enable/trigger after the spike
    @(posedge clk); #1 check(spk == 1'b0, "spike lasts one clock");
    repeat (3) @(posedge clk);
    #1 check(spk == 1'b0, "no spike without trigger");
    // held trigger: spikes on alternate clocks (FF1 cleared by the spike)
    nspk = 0;
    trig = 1'b1;
    repeat (6) @(posedge clk);
    #2 trig = 1'b0;
    repeat (2) @(posedge clk);
    check(nspk == 3, $sformatf("held trigger for 6 clocks gives 3 spikes (got %0d)", nspk));
    // disabled: no spike
    nspk = 0;
    en = 1'b0;
    trig = 1'b1;
    repeat (5) @(posedge clk);
    #1 check(nspk == 0 && spk == 1'b0, "disabled generator stays silent");
    trig = 1'b0;
    // enable drop clears a pending spike asynchronously
    en = 1'b1;
    trig = 1'b1;
    @(posedge clk); #1 check(spk == 1'b1, "spike again when enabled");
    en = 1'b0;
    #1 check(spk == 1'b0, "enable low clears the spike at once");
    trig = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
