// tb_neuron: self-checking test of one neuron with 8 synapses (the first
// layer of the 8__2_4__4 network).
//
// A reference model written here keeps one expected trace per synapse
// (loaded with +C two clocks after an input spike, then falling by one per
// clock). On every clock the test checks that the neuron output is the
// weighted sum of the traces when that sum reaches the threshold and 0
// otherwise, and that the latched value LV takes the weighted sum at the
// clock where the neuron's own output spike is first seen.
module tb_neuron;
  localparam int unsigned N = 8, CNT_W = 6, C = 63, W_W = 8, POT_W = 21;
  logic clk = 1'b0, rst_n = 1'b1, spk = 1'b0;
  logic [N-1:0]          ev = '0;
  logic [N-1:0][W_W-1:0] w;
  logic [POT_W-1:0]      thr = '0, nout, lv;
  logic [N-1:0][CNT_W:0] tr;
  logic [N-1:0]          sync;
  int checks = 0, failures = 0, n_fire = 0, n_below = 0;

  neuron #(.N_SYN(N), .CNT_W(CNT_W), .C(C), .W_W(W_W), .POT_W(POT_W)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_event(ev), .i_weight(w), .i_threshold(thr),
    .i_spike(spk), .o_neuron_out(nout), .o_lv(lv), .o_trace(tr), .o_sync(sync));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_ln[N];
  int sp_edge[N];
  int edge_cnt = 0, m_lv = 0;
  bit run = 0, spk_d = 0;

  function automatic int wsum();
    int s = 0;
    for (int i = 0; i < N; i++) s += int'(w[i]) * m_ln[i];
    return s;
  endfunction

  always @(posedge clk) begin
    if (run) begin
      edge_cnt++;
      if (spk && !spk_d) m_lv = wsum();   // sum before this edge's update
      spk_d = spk;
      for (int i = 0; i < N; i++) begin
        if (edge_cnt == sp_edge[i] + 2) m_ln[i] = (m_ln[i] + C > 127) ? 127 : m_ln[i] + C;
        else if (m_ln[i] > 0)           m_ln[i]--;
      end
      #1;
      if (wsum() >= int'(thr)) begin
        check(int'(nout) == wsum(), $sformatf("output %0d = weighted sum %0d at or above threshold %0d", nout, wsum(), thr));
        if (wsum() > 0) n_fire++;
      end else begin
        check(nout == '0, "output = 0 below threshold");
        n_below++;
      end
      check(int'(lv) == m_lv, "LV latched at the output spike");
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      m_ln[i]   = 0;
      sp_edge[i] = -100;
      w[i]      = W_W'($urandom);
    end
    // Two reset pulses: the spike-clocked capture flops only see an
    // asynchronous clear on a falling edge of their combined clear net.
    #2 rst_n = 1'b0;
    #3 rst_n = 1'b1;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) thr = POT_W'($urandom_range(0, 40000));
      if ($urandom_range(0, 9) == 0) w[$urandom_range(0, N-1)] = W_W'($urandom);
      for (int i = 0; i < N; i++)
        if ($urandom_range(0, 15) == 0 && edge_cnt > sp_edge[i] + 4) begin
          ev[i] = 1'b1;
          sp_edge[i] = edge_cnt;
        end
      spk = ($urandom_range(0, 7) == 0);
      #2 ev = '0;
    end
    run = 0;
    check(n_fire > 10 && n_below > 10, "both sides of the threshold exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
