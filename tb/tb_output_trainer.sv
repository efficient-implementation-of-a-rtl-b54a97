// tb_output_trainer: self-checking test of the trainer of the output layer
// (4 neurons with 2 synapses, the second layer of the 8__2_4__4 network).
//
// The label and the global attention signal (GAS) are applied as a short
// pulse; output spikes are driven directly. Scenarios and expectations,
// worked out here from the update rules (learning rate 2^-2, threshold
// punishment 63):
//  1. label = neuron 1, neuron 1 spikes: reward of neuron 1 (threshold 1/4
//     of the way to LV, weights 1/4 of the way to the stored traces), an
//     evaluation pulse with a match, applied PASS+1 = 7 clocks after the
//     first clock edge that sees GAS;
//  2. label = neuron 2, no spike: neuron 2 punished, no match;
//  3. label = neuron 0, neuron 3 spikes: negative weight update of neuron 3
//     (weights pushed away from the traces) and neuron 0 punished;
//  4. spike without GAS: no evaluation, no update;
//  5. training disabled: evaluation and match still reported, registers
//     frozen.
// After every evaluation the latched label must be cleared again.
module tb_output_trainer;
  import odesa_pkg::*;
  localparam int NN = 4, NS = 2, CNT_W = 6, W_W = 8, POT_W = 21;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1, gas = 1'b0;
  logic [NN-1:0]               label = '0, spk = '0;
  logic [NS-1:0][CNT_W:0]      trace;
  logic [NN-1:0][POT_W-1:0]    lv;
  logic [NN-1:0][NS-1:0][W_W-1:0] w;
  logic [NN-1:0][POT_W-1:0]    thr;
  logic eval, match, pend, rew, pun, negw;
  int checks = 0, failures = 0, edge_cnt = 0, gas_edge = 0;
  int n_eval = 0, n_match = 0, n_rew = 0, n_pun = 0, n_neg = 0, eval_edge = 0;
  bit gas_seen = 0;

  output_trainer #(.N_NEUR(NN), .N_SYN(NS), .CNT_W(CNT_W), .T_INIT(5000)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_train_en(en), .i_gas(gas), .i_label(label),
    .i_spike(spk), .i_trace(trace), .i_lv(lv), .o_weight(w), .o_threshold(thr),
    .o_eval(eval), .o_match(match), .o_gas_pending(pend),
    .o_reward(rew), .o_punish(pun), .o_negw(negw));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    edge_cnt++;
    if (gas_seen) begin
      gas_edge = edge_cnt;
      gas_seen = 0;
    end
    if (eval)  begin n_eval++; eval_edge = edge_cnt; end
    if (match) n_match++;
    if (rew)   n_rew++;
    if (pun)   n_pun++;
    if (negw)  n_neg++;
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

  function automatic int away(input int tgt, input int cur, input int sh);
    int v = cur - (toward(tgt, cur, sh) - cur);
    return v < 0 ? 0 : (v > 255 ? 255 : v);
  endfunction

  int t0[NN], w0[NN][NS];

  task automatic snap;
    for (int j = 0; j < NN; j++) begin
      t0[j] = int'(thr[j]);
      for (int i = 0; i < NS; i++) w0[j][i] = int'(w[j][i]);
    end
  endtask

  // label with GAS, optional spike 3 clocks later, wait for the pass
  task automatic sample(input logic [NN-1:0] lab, input logic [NN-1:0] who, input bit with_gas);
    n_eval = 0; n_match = 0; n_rew = 0; n_pun = 0; n_neg = 0;
    @(negedge clk);
    label = lab;
    if (with_gas) begin
      #1 gas = 1'b1;
      #2 gas = 1'b0;
      gas_seen = 1;
    end
    repeat (3) @(negedge clk);
    spk = who;
    @(negedge clk);
    spk = '0;
    repeat (8) @(negedge clk);
    label = '0;
    check(dut.r_label == '0, "label cleared after the pass");
  endtask

  initial begin
    trace[0] = 7'd40; trace[1] = 7'd100;
    for (int j = 0; j < NN; j++) lv[j] = POT_W'(3000 + j * 1000);
    #2 rst_n = 1'b0;
    #3 rst_n = 1'b1;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1: correct winner
    snap();
    sample(4'b0010, 4'b0010, 1'b1);
    check(n_eval == 1 && n_match == 1, "evaluation with match");
    check(eval_edge - gas_edge == 7, $sformatf("evaluation %0d clocks after GAS is seen (exp 7)", eval_edge - gas_edge));
    check(n_rew == 1 && n_pun == 0 && n_neg == 0, "reward only");
    check(int'(thr[1]) == toward(4000, t0[1], 2), "label neuron threshold towards LV");
    for (int i = 0; i < NS; i++)
      check(int'(w[1][i]) == toward(int'(trace[i]), w0[1][i], 2), "label neuron weights towards traces");
    check(int'(thr[0]) == t0[0] && int'(thr[2]) == t0[2] && int'(thr[3]) == t0[3], "others untouched");

    // 2: no winner
    snap();
    sample(4'b0100, 4'b0000, 1'b1);
    check(n_eval == 1 && n_match == 0, "evaluation without match");
    check(n_pun == 1 && n_rew == 0 && n_neg == 0, "punishment only");
    check(int'(thr[2]) == t0[2] - 63, "label neuron threshold - 63");
    check(int'(thr[1]) == t0[1], "others untouched");

    // 3: wrong winner
    snap();
    sample(4'b0001, 4'b1000, 1'b1);
    check(n_eval == 1 && n_match == 0, "wrong winner: no match");
    check(n_neg == 1 && n_pun == 1 && n_rew == 0, "negative update and punishment");
    check(int'(thr[0]) == t0[0] - 63, "label neuron punished");
    check(int'(thr[3]) == t0[3], "wrong winner threshold kept");
    for (int i = 0; i < NS; i++)
      check(int'(w[3][i]) == away(int'(trace[i]), w0[3][i], 2), "wrong winner weights pushed away");

    // 4: no GAS
    snap();
    sample(4'b0000, 4'b0100, 1'b0);
    check(n_eval == 0 && n_rew == 0 && n_pun == 0 && n_neg == 0, "no evaluation without GAS");

    // 5: training disabled
    en = 1'b0;
    snap();
    sample(4'b1000, 4'b1000, 1'b1);
    check(n_eval == 1 && n_match == 1, "evaluation reported with training off");
    check(n_rew == 0 && int'(thr[3]) == t0[3] && int'(w[3][0]) == w0[3][0], "frozen with training off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
