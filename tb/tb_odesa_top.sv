// tb_odesa_top: end-to-end test of the two-layer network at its default
// size (8__2_4__4, every parameter at its default, no overrides).
//
// Stimulus: the four spike patterns of the pattern-detection experiment.
// Each pattern has 16 input spikes, one every nu = 8 first-layer clocks,
// on lines i = 1..8:
//   pattern 1: line i at (i-1)nu and (8+i)nu
//   pattern 2: line i at (9-i)nu and (17-i)nu
//   pattern 3: line i at (i-1)nu and (17-i)nu
//   pattern 4: line i at (9-i)nu and (8+i)nu
// and the class label rides on the last spike (at 16nu). The training
// memory holds one word {label, events} per first-layer clock; each pattern
// is followed by 2nu empty words, so one epoch is 4 x 18 x 8 = 576 words.
// The words are written through the host write port.
//
// Phases:
//  1. training: the set is replayed TRAIN_EPOCHS times with learning on;
//  2. test: one more epoch with learning off; all four labelled samples
//     must be evaluated, and the number classified correctly is printed
//     (the accuracy is reported, not required: see the design notes);
//  3. external mode: the RAM is switched off and each pattern is played on
//     the external event inputs; the events must reach the network, the
//     winning output neuron is printed, and no evaluation may occur
//     without labels.
// Every mechanism is counted and must happen at least once: first-layer
// spikes, output spikes, GAS rewards and punishments of the hidden layer,
// LAS-driven updates of the hidden layer, output-layer rewards,
// punishments and negative weight updates, evaluations, epoch wrap, the
// training/test mode switch and the RAM/external switch. Cycle checks: one
// epoch takes 576 first-layer clocks = 11520 system clocks, and each output
// evaluation comes a fixed delta_t_pass after the label.
module tb_odesa_top;
  localparam int NU = 8, PAT_T = 18 * NU, NWORDS = 4 * PAT_T;
  localparam int TRAIN_EPOCHS = 150;

  logic        clk = 1'b0, rst_n = 1'b1;
  logic        use_ram = 1'b0, train_en = 1'b0;
  logic [7:0]  ext = '0;
  logic [11:0] len = '0;
  logic [15:0] epochs = '0;
  logic        we = 1'b0;
  logic [10:0] wa = '0;
  logic [11:0] wd = '0;
  logic [3:0]  spk;
  logic [1:0]  l1spk;
  logic [15:0] epoch;
  logic        done, l1win, l1rew, l1pun, l2rew, l2pun, l2neg, clk1, clk2;
  logic [31:0] evals, match_cnt;
  int checks = 0, failures = 0, test_acc = 0;

  odesa_top dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_use_ram(use_ram), .i_train_en(train_en),
    .i_events(ext), .i_len(len), .i_epochs(epochs), .i_wr_en(we), .i_wr_addr(wa),
    .i_wr_data(wd), .o_spike(spk), .o_l1_spike(l1spk), .o_epoch(epoch), .o_done(done),
    .o_eval_cnt(evals), .o_match_cnt(match_cnt), .o_l1_winner(l1win),
    .o_l1_reward(l1rew), .o_l1_punish(l1pun), .o_l2_reward(l2rew), .o_l2_punish(l2pun),
    .o_l2_negw(l2neg), .o_clk_l1(clk1), .o_clk_l2(clk2));

  always #10 clk = ~clk;   // 50 MHz system clock

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #((TRAIN_EPOCHS + 6) * NWORDS * 20 * 20 + 2000000);
    failures++;
    $display("FAIL: watchdog");
    $display("accuracy of the test epoch: %0d of 4 labelled patterns", test_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- pattern generator ----------------
  // time step (in units of nu) at which line i (1..8) spikes in pattern p
  function automatic int t_first(input int p, input int i);
    return (p == 1 || p == 3) ? i - 1 : 9 - i;
  endfunction
  function automatic int t_second(input int p, input int i);
    return (p == 1 || p == 4) ? 8 + i : 17 - i;
  endfunction
  function automatic logic [7:0] events_at(input int p, input int step);
    logic [7:0] e = '0;
    for (int i = 1; i <= 8; i++)
      if (t_first(p, i) == step || t_second(p, i) == step) e[i-1] = 1'b1;
    return e;
  endfunction
  function automatic logic [11:0] word(input int addr);
    int p    = addr / PAT_T + 1;
    int off  = addr % PAT_T;
    logic [11:0] w = '0;
    if (off % NU == 0 && off / NU <= 16) begin
      w[7:0] = events_at(p, off / NU);
      if (off / NU == 16) w[8 + p - 1] = 1'b1;   // label on the last spike
    end
    return w;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_l1spk = 0, n_l2spk = 0, n_l1rew = 0, n_l1pun = 0, n_las = 0;
  int n_l2rew = 0, n_l2pun = 0, n_l2neg = 0, n_wrap = 0, n_clk1 = 0;
  int win_class[4];
  int cur_class = 0;
  logic [15:0] epoch_d = '0;
  always @(posedge clk1) begin
    n_clk1++;
    if (|l1spk) n_l1spk++;
    if (l1rew)  n_l1rew++;
    if (l1pun)  n_l1pun++;
    if (dut.u_tr1.w_las_do && train_en && (dut.u_tr1.w_act != '0)) n_las++;
    if (epoch != epoch_d) n_wrap++;
    epoch_d <= epoch;
  end
  always @(posedge clk2) begin
    if (|spk)  n_l2spk++;
    if (l2rew) n_l2rew++;
    if (l2pun) n_l2pun++;
    if (l2neg) n_l2neg++;
  end

  // delta_t_pass check: the output evaluation comes a fixed number of
  // second-layer clocks after the label is seen
  int gas_t = -1, lat_min = 1000, lat_max = -1, n_clk2 = 0;
  always @(posedge clk2) begin
    n_clk2++;
    if (dut.u_tr2.r_gas && !dut.u_tr2.r_gas_d) gas_t = n_clk2;
    if (dut.u_tr2.o_eval && gas_t >= 0) begin
      if (n_clk2 - gas_t < lat_min) lat_min = n_clk2 - gas_t;
      if (n_clk2 - gas_t > lat_max) lat_max = n_clk2 - gas_t;
    end
  end

  task automatic run_until_done;
    int guard = 0;
    while (!done && guard < 100000000) begin
      @(posedge clk);
      guard++;
    end
  endtask

  initial begin
    int e0, m0, t0, t1, n1, ext_l1;
    logic [3:0] seen;
    // two reset pulses: the spike-clocked capture flops clear on a falling
    // edge of their clear net
    #5 rst_n = 1'b0;
    #7 rst_n = 1'b1;
    #3 rst_n = 1'b0;
    repeat (30) @(posedge clk);
    #1 rst_n = 1'b1;

    // load the training set
    for (int a = 0; a < NWORDS; a++) begin
      @(negedge clk);
      we = 1'b1; wa = 11'(a); wd = word(a);
    end
    @(negedge clk);
    we = 1'b0;

    // 1. training
    len = 12'(NWORDS);
    epochs = 16'(TRAIN_EPOCHS);
    train_en = 1'b1;
    @(negedge clk);
    use_ram = 1'b1;
    t0 = n_clk1;
    @(posedge clk1);
    while (epoch == 0) @(posedge clk1);
    t1 = n_clk1;
    check(t1 - t0 >= NWORDS && t1 - t0 <= NWORDS + 2,
          $sformatf("one epoch = %0d first-layer clocks (%0d measured)", NWORDS, t1 - t0));
    n1 = n_clk1;
    while (epoch == 1) @(posedge clk1);
    check(n_clk1 - n1 == NWORDS, $sformatf("epoch period %0d first-layer clocks", n_clk1 - n1));
    run_until_done();
    check(epoch == 16'(TRAIN_EPOCHS), "training epochs counted");
    $display("after training: evaluations %0d matches %0d", evals, match_cnt);

    // 2. test epoch, learning off
    @(negedge clk1);
    train_en = 1'b0;
    e0 = int'(evals); m0 = int'(match_cnt);
    epochs = 16'(TRAIN_EPOCHS + 1);
    @(posedge clk1);
    run_until_done();
    repeat (40 * 20) @(posedge clk);
    $display("test epoch: evaluations %0d matches %0d", int'(evals) - e0, int'(match_cnt) - m0);
    check(int'(evals) - e0 == 4, "four labelled samples evaluated in the test epoch");
    test_acc = int'(match_cnt) - m0;

    // 3. external mode: play each pattern on i_events
    use_ram = 1'b0;
    e0 = int'(evals);
    ext_l1 = n_l1spk;
    seen = '0;
    for (int p = 1; p <= 4; p++) begin
      win_class[p-1] = -1;
      for (int step = 0; step < PAT_T / NU; step++) begin
        for (int k = 0; k < NU; k++) begin
          @(negedge clk1);
          ext = (k == 0 && step <= 16) ? events_at(p, step) : '0;
          if (step == 16 && k > 0 && |spk && win_class[p-1] < 0)
            for (int j = 0; j < 4; j++) if (spk[j]) win_class[p-1] = j;
        end
      end
      ext = '0;
      if (win_class[p-1] >= 0) seen[win_class[p-1]] = 1'b1;
      $display("external pattern %0d -> output neuron %0d at the last spike", p, win_class[p-1]);
    end
    check(n_l1spk > ext_l1, "external events reach the network (first-layer spikes)");
    check(int'(evals) == e0, "no evaluation without labels");

    // mechanisms
    $display("mechanisms: L1 spikes %0d, L2 spikes %0d, L1 GAS/LAS rewards %0d, L1 punishments %0d, LAS updates %0d",
             n_l1spk, n_l2spk, n_l1rew, n_l1pun, n_las);
    $display("            L2 rewards %0d, L2 punishments %0d, L2 negative updates %0d, epoch wraps %0d, pass latency %0d..%0d",
             n_l2rew, n_l2pun, n_l2neg, n_wrap, lat_min, lat_max);
    check(n_l1spk > 0, "first-layer spikes");
    check(n_l2spk > 0, "output spikes");
    check(n_l1rew > 0, "hidden-layer rewards");
    check(n_l1pun > 0, "hidden-layer punishments");
    check(n_las > 0, "LAS-driven hidden-layer updates");
    check(n_l2rew > 0, "output-layer rewards");
    check(n_l2pun > 0, "output-layer punishments");
    check(n_l2neg > 0, "output-layer negative weight updates");
    check(n_wrap >= TRAIN_EPOCHS, "epoch wraps");
    check(lat_min == 6 && lat_max == 6, "evaluation delta_t_pass = 6 second-layer clocks after the label");
    $display("accuracy of the test epoch: %0d of 4 labelled patterns", test_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
