// tb_synapse: self-checking test of one synapse (synchronizer, leaky
// accumulator and weight multiplier).
//
// Input spikes are short pulses between clock edges, as the previous layer
// or the input produces them. Checks on every clock:
//  - the synchronised level appears at the first rising edge after the
//    spike, and the trace is loaded at the next one (two clocks of latency
//    from the spike to the loaded trace);
//  - the trace equals the one before plus C at the load, and falls by one
//    per clock otherwise;
//  - the synchronizer is re-armed three clocks after it caught the spike,
//    so a later spike is taken again;
//  - the synapse output is weight x trace at all times, for random weights;
//  - o_trace is the trace delayed by one clock.
module tb_synapse;
  localparam int unsigned CNT_W = 6, C = 63, W_W = 8;
  logic clk = 1'b0, rst_n = 1'b1, ev = 1'b0;
  logic [W_W-1:0]     w = '0;
  logic [W_W+CNT_W:0] out;
  logic [CNT_W:0]     tr;
  logic               sync;
  int checks = 0, failures = 0;

  synapse #(.CNT_W(CNT_W), .C(C), .W_W(W_W)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_event(ev), .i_weight(w),
    .o_synapse_out(out), .o_trace(tr), .o_sync(sync));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #300000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected trace: spikes recorded in 'pend' are loaded two edges later
  int m_ln = 0, m_prev = 0, edge_cnt = 0, spike_edge = -100;
  bit run = 0;
  always @(posedge clk) begin
    if (run) begin
      edge_cnt++;
      m_prev = m_ln;
      if (edge_cnt == spike_edge + 2) m_ln = (m_ln + C > 127) ? 127 : m_ln + C;
      else if (m_ln > 0)              m_ln = m_ln - 1;
      #1;
      check(int'(dut.u_acc.o_ln) == m_ln, $sformatf("trace %0d, expected %0d", dut.u_acc.o_ln, m_ln));
      check(int'(tr) == m_prev, "o_trace is the trace one clock later");
      check(int'(out) == int'(w) * m_ln, "output = weight x trace");
      if (edge_cnt == spike_edge + 1) check(sync == 1'b1, "synchronised at first edge");
      if (edge_cnt == spike_edge + 4) check(sync == 1'b0, "synchronizer re-armed");
    end
  end

  task automatic spike;
    @(negedge clk);
    #1 ev = 1'b1;
    #2 ev = 1'b0;
    spike_edge = edge_cnt;
  endtask

  initial begin
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(sync == 1'b0 && tr == '0 && out == '0, "reset state");
    run = 1;
    w = 8'd200;
    spike;
    repeat (10) @(posedge clk);
    spike;                  // close spike: adds to the remaining trace
    repeat (80) @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      w = W_W'($urandom);
      spike;
      repeat ($urandom_range(5, 70)) @(posedge clk);
    end
    run = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
