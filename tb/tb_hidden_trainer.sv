// tb_hidden_trainer: self-checking test of the trainer of a hidden layer
// (2 neurons with 8 synapses, the first layer of the 8__2_4__4 network).
//
// The trainer's inputs are driven directly. Scenarios:
//  1. event, neuron 1 spikes, the global attention signal (GAS) arrives:
//     three clocks after IS_EVENT (the delta_t_pass window, PASS = 3) the
//     winner is rewarded once: its threshold moves 1/8 of the way to its LV
//     and its weights move 1/8 of the way to the stored time surface; the
//     other neuron is left alone;
//  2. event without a spike, GAS arrives: both neurons are punished once
//     (threshold - 63) and the next layer's traces are kept as NO_WINNER;
//  3. event with a spike but no GAS: nothing is trained;
//  4. a local attention signal (LAS) with neuron 0's next-layer trace above
//     one tenth of its range: neuron 0 is rewarded; neuron 1, whose trace is
//     low but whose NO_WINNER value is high, is punished;
//  5. with training disabled nothing changes.
// Expected values are worked out here from the update rules.
module tb_hidden_trainer;
  import odesa_pkg::*;
  localparam int NN = 2, NS = 8, CNT_W = 6, W_W = 8, POT_W = 21;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1, is_ev = 1'b0, gas = 1'b0, las = 1'b0;
  logic [NN-1:0]               spk = '0;
  logic [NS-1:0][CNT_W:0]      trace;
  logic [NN-1:0][POT_W-1:0]    lv;
  logic [NN-1:0][CNT_W:0]      ntr = '0;
  logic [NN-1:0][NS-1:0][W_W-1:0] w;
  logic [NN-1:0][POT_W-1:0]    thr;
  logic rew, pun;
  int checks = 0, failures = 0, edge_cnt = 0;
  int rew_edges[$], pun_edges[$];
  int ev_edge = 0;

  hidden_trainer #(.N_NEUR(NN), .N_SYN(NS), .CNT_W(CNT_W), .NCNT_W(CNT_W), .T_INIT(5000)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_train_en(en), .i_is_event(is_ev), .i_spike(spk),
    .i_gas(gas), .i_las(las), .i_trace(trace), .i_lv(lv), .i_next_trace(ntr),
    .o_weight(w), .o_threshold(thr), .o_reward(rew), .o_punish(pun));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    edge_cnt++;
    if (is_ev) ev_edge = edge_cnt;
    if (rew) rew_edges.push_back(edge_cnt);
    if (pun) pun_edges.push_back(edge_cnt);
  end

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

  function automatic int toward(input int tgt, input int cur, input int sh);
    int d = tgt - cur;
    int q;
    if (d == 0) return cur;
    q = (d >= 0) ? (d >> sh) : -((-d + (1 << sh) - 1) >> sh);
    if (q == 0) q = (d > 0) ? 1 : -1;
    return cur + q;
  endfunction

  task automatic pulse(ref logic s);
    #1 s = 1'b1;
    #2 s = 1'b0;
  endtask

  // one event: IS_EVENT high for one clock (edge e), optional spike at e+2
  task automatic event_seq(input logic [NN-1:0] who, input bit with_gas, output int e);
    @(negedge clk);
    is_ev = 1'b1;
    @(negedge clk);
    e = ev_edge;
    is_ev = 1'b0;
    if (with_gas) pulse(gas);
    @(negedge clk);
    spk = who;
    @(negedge clk);
    spk = '0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    int e, t0[NN], t1[NN], w0[NN][NS], w1[NN][NS];
    for (int i = 0; i < NS; i++) trace[i] = 7'(i * 9 + 3);
    lv[0] = 21'd9000; lv[1] = 21'd12000;
    #2 rst_n = 1'b0;
    #3 rst_n = 1'b1;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(thr[0] == 21'd5000 && thr[1] == 21'd5000, "reset thresholds");

    // 1: winner rewarded
    for (int j = 0; j < NN; j++) begin
      t0[j] = int'(thr[j]);
      for (int i = 0; i < NS; i++) w0[j][i] = int'(w[j][i]);
    end
    rew_edges.delete(); pun_edges.delete();
    event_seq(2'b10, 1'b1, e);
    check(rew_edges.size() == 1 && pun_edges.size() == 0, "one reward, no punishment");
    if (rew_edges.size() == 1)
      check(rew_edges[0] == e + 3, $sformatf("reward applied %0d edges after IS_EVENT (exp 3)", rew_edges[0] - e));
    check(int'(thr[1]) == toward(12000, t0[1], 3), "winner threshold moved towards LV");
    check(int'(thr[0]) == t0[0], "loser threshold unchanged");
    for (int i = 0; i < NS; i++) begin
      check(int'(w[1][i]) == toward(i * 9 + 3, w0[1][i], 3),
            $sformatf("winner weight %0d: %0d -> %0d, time surface %0d ts %0d", i, w0[1][i], w[1][i], i * 9 + 3, dut.r_ts[1][i]));
      check(int'(w[0][i]) == w0[0][i], "loser weight unchanged");
    end

    // 2: no winner with GAS: punish all, store NO_WINNER
    for (int j = 0; j < NN; j++) t0[j] = int'(thr[j]);
    ntr[0] = 7'd3; ntr[1] = 7'd40;
    rew_edges.delete(); pun_edges.delete();
    event_seq(2'b00, 1'b1, e);
    check(pun_edges.size() == 1 && rew_edges.size() == 0, "one punishment");
    if (pun_edges.size() == 1) check(pun_edges[0] == e + 3, "punishment at the end of the pass window");
    check(int'(thr[0]) == t0[0] - 63 && int'(thr[1]) == t0[1] - 63, "both thresholds lowered by 63");

    // 3: spike without GAS: nothing
    for (int j = 0; j < NN; j++) t0[j] = int'(thr[j]);
    rew_edges.delete(); pun_edges.delete();
    event_seq(2'b01, 1'b0, e);
    check(rew_edges.size() == 0 && pun_edges.size() == 0, "no training without GAS");
    check(int'(thr[0]) == t0[0] && int'(thr[1]) == t0[1], "thresholds unchanged");

    // 4: LAS: neuron 0 rewarded (trace high), neuron 1 punished (NO_WINNER high)
    for (int j = 0; j < NN; j++) begin
      t0[j] = int'(thr[j]);
      for (int i = 0; i < NS; i++) w0[j][i] = int'(w[j][i]);
    end
    ntr[0] = 7'd50; ntr[1] = 7'd2;
    rew_edges.delete(); pun_edges.delete();
    @(negedge clk); pulse(las);
    repeat (6) @(negedge clk);
    check(rew_edges.size() == 1 && pun_edges.size() == 1, "LAS: one reward and one punishment");
    check(int'(thr[0]) == toward(9000, t0[0], 3), "LAS reward of neuron 0 threshold");
    check(int'(thr[1]) == t0[1] - 63, "LAS punishment of neuron 1 (NO_WINNER above limit)");
    // a second LAS with both next-layer traces low and NO_WINNER spent: nothing
    ntr = '0;
    for (int j = 0; j < NN; j++) t1[j] = int'(thr[j]);
    @(negedge clk); pulse(las);
    repeat (6) @(negedge clk);
    check(int'(thr[0]) == t1[0], "LAS with low trace leaves neuron 0");
    check(int'(thr[1]) == t1[1], "NO_WINNER of neuron 1 is spent after one punishment");

    // 5: training disabled
    en = 1'b0;
    for (int j = 0; j < NN; j++) begin
      t0[j] = int'(thr[j]);
      for (int i = 0; i < NS; i++) w1[j][i] = int'(w[j][i]);
    end
    rew_edges.delete(); pun_edges.delete();
    event_seq(2'b10, 1'b1, e);
    event_seq(2'b00, 1'b1, e);
    check(rew_edges.size() == 0 && pun_edges.size() == 0, "no updates with training off");
    check(int'(thr[0]) == t0[0] && int'(thr[1]) == t0[1] && int'(w[1][0]) == w1[1][0], "registers frozen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
