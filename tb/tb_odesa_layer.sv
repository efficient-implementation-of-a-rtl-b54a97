// tb_odesa_layer: self-checking test of one network layer (8 synapses per
// neuron, 2 neurons, comparator and spike generators: the first layer of the
// 8__2_4__4 network).
//
// Input spikes are applied one at a time, at least 8 clocks apart. A
// reference model written here keeps the expected trace of each input line
// and computes each neuron's weighted sum after the trace load. For every
// input spike the test checks:
//  - IS_EVENT is seen in the clock where the synchronizer first shows the
//    spike (edge k);
//  - if some neuron's sum reaches its threshold and is non-zero, exactly one
//    output spike follows, at edge k+2 (two clocks after synchronisation),
//    on the neuron with the largest sum (lowest index on a tie), and
//    IS_WINNER goes high with it;
//  - otherwise no neuron spikes in the whole window;
//  - the spiking neuron's LV equals its sum at the spike.
// Random weights and thresholds are used; the number of events with and
// without a winner are both required to be non-zero.
module tb_odesa_layer;
  localparam int unsigned NS = 8, NN = 2, CNT_W = 6, C = 63, W_W = 8, POT_W = 21;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [NS-1:0]                   ev = '0;
  logic [NN-1:0][NS-1:0][W_W-1:0]  w;
  logic [NN-1:0][POT_W-1:0]        thr;
  logic [NN-1:0]                   spk;
  logic                            is_event, is_winner;
  logic [NN-1:0][POT_W-1:0]        lv;
  logic [NS-1:0][CNT_W:0]          tr;
  int checks = 0, failures = 0, n_win = 0, n_nowin = 0;

  odesa_layer #(.N_SYN(NS), .N_NEUR(NN)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_event(ev), .i_weight(w), .i_threshold(thr),
    .o_spike(spk), .o_is_event(is_event), .o_is_winner(is_winner), .o_lv(lv), .o_trace(tr));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_ln[NS];
  int sp_edge = -100, sp_line = 0, edge_cnt = 0;
  bit run = 0;

  function automatic int nsum(input int j);
    int s = 0;
    for (int i = 0; i < NS; i++) s += int'(w[j][i]) * m_ln[i];
    return s;
  endfunction

  // model traces
  always @(posedge clk) begin
    if (run) begin
      edge_cnt++;
      for (int i = 0; i < NS; i++) begin
        if (edge_cnt == sp_edge + 2 && i == sp_line) m_ln[i] = (m_ln[i] + C > 127) ? 127 : m_ln[i] + C;
        else if (m_ln[i] > 0)                       m_ln[i]--;
      end
    end
  end

  task automatic one_event(input int line);
    int s[NN];
    int best, bestv, nspk, spk_edge, s2;
    logic [NN-1:0] spk_seen;
    @(negedge clk);
    #1 ev[line] = 1'b1;
    sp_line = line;
    sp_edge = edge_cnt;
    #2 ev = '0;
    @(posedge clk); #1;                        // edge k
    check(is_event == 1'b1, "IS_EVENT at the synchronising edge");
    @(posedge clk); #1;                        // edge k+1: traces loaded
    best = -1; bestv = 0;
    for (int j = 0; j < NN; j++) begin
      s[j] = nsum(j);
      if (s[j] >= int'(thr[j]) && s[j] > bestv) begin
        best  = j;
        bestv = s[j];
      end
    end
    check(spk == '0, "no spike at k+1");
    nspk = 0; spk_seen = '0; spk_edge = -1;
    for (int c = 2; c <= 7; c++) begin
      @(posedge clk); #1;
      if (c == 2 && best >= 0) s2 = nsum(best);
      if (spk != '0) begin
        nspk++;
        spk_seen = spk;
        if (spk_edge < 0) spk_edge = c;
        check(is_winner == 1'b1, "IS_WINNER with the spike");
      end
    end
    if (best >= 0) begin
      n_win++;
      check(nspk == 1, $sformatf("exactly one spike per event (got %0d)", nspk));
      check(spk_edge == 2, $sformatf("spike at k+2 (got k+%0d)", spk_edge));
      check(spk_seen == NN'(1 << best), $sformatf("winner is neuron %0d (got %b)", best, spk_seen));
      // LV is taken at the first clock edge that sees the spike (k+3), so
      // it holds the potential during the spike clock [k+2, k+3).
      check(int'(lv[best]) == s2, $sformatf("LV %0d = potential %0d during the spike", lv[best], s2));
    end else begin
      n_nowin++;
      check(nspk == 0, "no spike when no neuron reaches its threshold");
    end
  endtask

  initial begin
    for (int i = 0; i < NS; i++) m_ln[i] = 0;
    for (int j = 0; j < NN; j++) begin
      thr[j] = '0;
      for (int i = 0; i < NS; i++) w[j][i] = 8'd1;
    end
    // two reset pulses, see tb_neuron
    #2 rst_n = 1'b0;
    #3 rst_n = 1'b1;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run = 1;
    // directed: neuron 0 prefers line 0, neuron 1 prefers line 5
    w[0][0] = 8'd200; w[1][5] = 8'd220;
    one_event(0);
    repeat (70) @(posedge clk);
    one_event(5);
    repeat (70) @(posedge clk);
    // thresholds out of reach: no winner
    thr[0] = 21'd100000; thr[1] = 21'd100000;
    one_event(3);
    repeat (70) @(posedge clk);
    // random
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      for (int j = 0; j < NN; j++) begin
        thr[j] = POT_W'($urandom_range(0, 25000));
        for (int i = 0; i < NS; i++) w[j][i] = W_W'($urandom);
      end
      one_event($urandom_range(0, NS-1));
      repeat ($urandom_range(2, 30)) @(posedge clk);
    end
    run = 0;
    check(n_win > 5 && n_nowin > 3, $sformatf("winner (%0d) and no-winner (%0d) events seen", n_win, n_nowin));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
