// tb_odesa_iris: system test of the network built in its Iris configuration
// (4__6_3__3: 4 input lines, 6 hidden neurons, 3 classes), with the
// settings of the Iris experiment: 8-bit traces (C = 255), second-layer
// clock = first-layer clock / 4, fixed-step (sign) weight updates of 1 (L1)
// and 2 (L2), fixed threshold reward step 127 in L1, threshold reward
// 2^-10 in L2, adaptive punishment step, and LAS masked outside labels.
//
// Stimulus: 45 latency-coded samples (the size of a 30 % training split of
// the 150-sample set). Each sample is one spike per feature line, at a
// time step in [0,30] drawn with $urandom around a per-class centre; the
// label rides on the word of the sample's latest spike. Each sample takes
// 45 words (31 time steps and 14 empty words), so the set is 2025 of the
// 2048 RAM words. The output trainer is busy for about 8 second-layer
// (32 first-layer) clocks after a label and ignores labels that arrive in
// that time; with labels at the latest spike, two labels can come closer
// than that, so a few samples per epoch may go unevaluated.
// The real data are not bundled; the test checks mechanisms, not accuracy.
//
// Checks:
//  * one epoch = 2025 first-layer clocks; clk_l2 period = 4 clk_l1 periods;
//  * every update of the register banks, tracked at each rising layer
//    clock against the action applied at that edge:
//      L1 reward: weights move by exactly 1 towards TS (or stay if equal),
//                 threshold moves by 127 (clamped at 0 / full scale);
//      L1 and L2 punish: threshold drops by the adaptive step
//                 (1023 / 255 / 15 / 1 by range) or stops at 0;
//      L2 reward / negative update: weights move by at most 2;
//      no action: nothing changes;
//    (the first layer always finds a winner on this stimulus, so its
//    punishments are checked when they happen but not required; the
//    adaptive step itself is covered by tb_tw_register_bank and by the
//    second layer here);
//  * LAS masking: the L1 trainer never receives LAS without a pending
//    label, and some output spikes are masked;
//  * a test epoch with learning off evaluates between 40 and 45 of the 45
//    samples (see above; the accuracy is printed only).
module tb_odesa_iris;
  import odesa_pkg::*;
  localparam int NS = 45, SLOT = 45, NWORDS = NS * SLOT;
  localparam int TRAIN_EPOCHS = 40;
  localparam int PMAX = (1 << 21) - 1;

  logic        clk = 1'b0, rst_n = 1'b1;
  logic        use_ram = 1'b0, train_en = 1'b0;
  logic [3:0]  ext = '0;
  logic [11:0] len = '0;
  logic [15:0] epochs = '0;
  logic        we = 1'b0;
  logic [10:0] wa = '0;
  logic [6:0]  wd = '0;
  logic [2:0]  spk;
  logic [5:0]  l1spk;
  logic [15:0] epoch;
  logic        done, l1win, l1rew, l1pun, l2rew, l2pun, l2neg, clk1, clk2;
  logic [31:0] evals, match_cnt;
  int checks = 0, failures = 0, test_acc = 0;

  odesa_top #(
    .N_IN(4), .N_L1(6), .N_CLS(3),
    .CNT_W1(8), .C1(255), .CNT_W2(8), .C2(255),
    .W_MODE1(UPD_SIGN), .W_ETA1(1), .T_MODE1(UPD_SIGN), .T_ETA1(127),
    .DT_MODE1(DT_ADAPTIVE), .DELTA_T1(1),
    .W_MODE2(UPD_SIGN), .W_ETA2(2), .T_MODE2(UPD_SHIFT), .T_ETA2(10),
    .DT_MODE2(DT_ADAPTIVE), .DELTA_T2(1),
    .LAS_AFTER_GAS(1'b1), .DIV_L1(20), .RATIO_L2(4), .DEPTH(2048)
  ) dut (
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
      if (failures < 40) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #((TRAIN_EPOCHS + 4) * NWORDS * 20 * 20 + 2000000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- samples ----------------
  int ts[NS][4];
  int cls[NS];
  int centre[3][4] = '{'{10, 20, 3, 2}, '{16, 11, 15, 13}, '{21, 14, 25, 24}};
  function automatic logic [6:0] word(input int addr);
    int s = addr / SLOT, t = addr % SLOT, last = 0;
    logic [6:0] w = '0;
    for (int f = 0; f < 4; f++) begin
      if (ts[s][f] == t) w[f] = 1'b1;
      if (ts[s][f] > last) last = ts[s][f];
    end
    if (t == last) w[4 + cls[s]] = 1'b1;
    return w;
  endfunction

  // ---------------- reference step sizes ----------------
  function automatic int adapt(input int t);
    if (t > 65535) return 1023;
    if (t > 4095)  return 255;
    if (t > 255)   return 15;
    return 1;
  endfunction
  function automatic int iabs(input int v);
    return v < 0 ? -v : v;
  endfunction

  // ---------------- register-bank tracking ----------------
  // At each rising layer clock the action being applied and the registers
  // are sampled before the update (the register bank's non-blocking
  // assignments have not landed yet); the next rising edge sees the result.
  // The action is not sampled on the falling edge: the output trainer's
  // label comes from the first-layer domain and may change in between.
  int n_l1_w = 0, n_l1_t_rew = 0, n_pun1 = 0, n_pun2 = 0, n_l2_w = 0;
  int n_las_in = 0, n_masked = 0, n_bad_las = 0;
  action_e a1_d[6];
  int w1_d[6][4], t1_d[6], ts1_d[6][4];
  action_e a2_d[3];
  int w2_d[3][6], t2_d[3];
  bit started1 = 1'b0, started2 = 1'b0, track = 1'b0;  // track: reset is over

  always @(posedge clk1) if (track) begin
    for (int i = 0; i < 6; i++) begin
      automatic int tn = int'(dut.u_tr1.u_bank.o_threshold[i]);
      if (started1) begin
        for (int j = 0; j < 4; j++) begin
          automatic int wn = int'(dut.u_tr1.u_bank.o_weight[i][j]);
          case (a1_d[i])
            ACT_REWARD: begin
              // one step of 1 towards TS, held inside the 8-bit weight range
              // (TS has one bit more than the weight)
              check(wn - w1_d[i][j] == ((ts1_d[i][j] > w1_d[i][j] && w1_d[i][j] < 255) ? 1 :
                                        (ts1_d[i][j] < w1_d[i][j]) ? -1 : 0),
                    $sformatf("L1 n%0d s%0d sign step: %0d -> %0d (TS %0d)", i, j,
                              w1_d[i][j], wn, ts1_d[i][j]));
              if (wn != w1_d[i][j]) n_l1_w++;
            end
            default: check(wn == w1_d[i][j], $sformatf("L1 n%0d s%0d weight changed without reward (act %0d, %0d -> %0d)", i, j, a1_d[i], w1_d[i][j], wn));
          endcase
        end
        case (a1_d[i])
          ACT_REWARD: begin
            check(iabs(tn - t1_d[i]) == 127 || tn == 0 || tn == PMAX || tn == t1_d[i],
                  $sformatf("L1 n%0d threshold reward step %0d -> %0d", i, t1_d[i], tn));
            if (tn != t1_d[i]) n_l1_t_rew++;
          end
          ACT_PUNISH: begin
            check(tn == ((t1_d[i] > adapt(t1_d[i])) ? t1_d[i] - adapt(t1_d[i]) : 0),
                  $sformatf("L1 n%0d adaptive punish %0d -> %0d", i, t1_d[i], tn));
            n_pun1++;
          end
          default: check(tn == t1_d[i], $sformatf("L1 n%0d threshold changed without action", i));
        endcase
      end
      a1_d[i] = dut.u_tr1.w_act[i];
      t1_d[i] = tn;
      for (int j = 0; j < 4; j++) begin
        w1_d[i][j]  = int'(dut.u_tr1.u_bank.o_weight[i][j]);
        ts1_d[i][j] = int'(dut.u_tr1.u_bank.i_ts[i][j]);
      end
    end
    started1 = 1'b1;
  end

  always @(posedge clk2) if (track) begin
    for (int i = 0; i < 3; i++) begin
      automatic int tn = int'(dut.u_tr2.u_bank.o_threshold[i]);
      if (started2) begin
        for (int j = 0; j < 6; j++) begin
          automatic int wn = int'(dut.u_tr2.u_bank.o_weight[i][j]);
          if (a2_d[i] == ACT_REWARD || a2_d[i] == ACT_NEGW) begin
            check(iabs(wn - w2_d[i][j]) <= 2, $sformatf("L2 n%0d s%0d step %0d -> %0d", i, j, w2_d[i][j], wn));
            if (wn != w2_d[i][j]) n_l2_w++;
          end else
            check(wn == w2_d[i][j], $sformatf("L2 n%0d s%0d weight changed without update", i, j));
        end
        if (a2_d[i] == ACT_PUNISH) begin
          check(tn == ((t2_d[i] > adapt(t2_d[i])) ? t2_d[i] - adapt(t2_d[i]) : 0),
                $sformatf("L2 n%0d adaptive punish %0d -> %0d", i, t2_d[i], tn));
          n_pun2++;
        end else if (a2_d[i] == ACT_REWARD)
          check(iabs(tn - t2_d[i]) <= ((PMAX >> 10) > 1 ? (PMAX >> 10) : 1),
                $sformatf("L2 n%0d threshold reward %0d -> %0d", i, t2_d[i], tn));
        else
          check(tn == t2_d[i], $sformatf("L2 n%0d threshold changed without action", i));
      end
      a2_d[i] = dut.u_tr2.w_act[i];
      t2_d[i] = tn;
      for (int j = 0; j < 6; j++) w2_d[i][j] = int'(dut.u_tr2.u_bank.o_weight[i][j]);
    end
    started2 = 1'b1;
  end

  // LAS masking, seen on the second-layer clock
  always @(posedge clk2) if (rst_n && train_en) begin
    if (dut.w_las) n_las_in++;
    if (dut.w_las && !dut.w_gas_pending) n_bad_las++;
    if (|spk && !dut.w_gas_pending) n_masked++;
  end

  // clock ratio and epoch length
  int n_clk1 = 0, n_clk2_at = -1, l2_period = 0;
  always @(posedge clk1) n_clk1++;
  always @(posedge clk2) begin
    if (n_clk2_at >= 0) l2_period = n_clk1 - n_clk2_at;
    n_clk2_at = n_clk1;
  end

  task automatic run_until_done;
    int guard = 0;
    while (!done && guard < 100000000) begin
      @(posedge clk);
      guard++;
    end
  endtask

  initial begin
    int e0, m0, t0, t1;
    for (int s = 0; s < NS; s++) begin
      cls[s] = s % 3;
      for (int f = 0; f < 4; f++) begin
        automatic int v = centre[cls[s]][f] + int'($urandom_range(0, 6)) - 3;
        ts[s][f] = v < 0 ? 0 : (v > 30 ? 30 : v);
      end
    end
    #5 rst_n = 1'b0;
    #7 rst_n = 1'b1;
    #3 rst_n = 1'b0;
    repeat (30) @(posedge clk);
    #1 rst_n = 1'b1;
    track = 1'b1;

    for (int a = 0; a < NWORDS; a++) begin
      @(negedge clk);
      we = 1'b1; wa = 11'(a); wd = word(a);
    end
    @(negedge clk);
    we = 1'b0;

    len = 12'(NWORDS);
    epochs = 16'(TRAIN_EPOCHS);
    train_en = 1'b1;
    @(negedge clk);
    use_ram = 1'b1;
    @(posedge clk1);
    while (epoch == 0) @(posedge clk1);
    t0 = n_clk1;
    while (epoch == 1) @(posedge clk1);
    t1 = n_clk1;
    check(t1 - t0 == NWORDS, $sformatf("epoch = %0d first-layer clocks (%0d)", NWORDS, t1 - t0));
    check(l2_period == 4, $sformatf("clk_l2 period = 4 clk_l1 (%0d)", l2_period));
    run_until_done();
    check(epoch == 16'(TRAIN_EPOCHS), "training epochs counted");
    repeat (80 * 20) @(posedge clk);   // let the last label's evaluation finish

    @(negedge clk1);
    train_en = 1'b0;
    e0 = int'(evals); m0 = int'(match_cnt);
    epochs = 16'(TRAIN_EPOCHS + 1);
    @(posedge clk1);
    run_until_done();
    repeat (40 * 20 * 4) @(posedge clk);
    test_acc = int'(match_cnt) - m0;
    check(int'(evals) - e0 <= NS && int'(evals) - e0 >= NS - 5,
          $sformatf("%0d of %0d samples evaluated in the test epoch", int'(evals) - e0, NS));
    $display("test epoch: %0d of %0d samples evaluated", int'(evals) - e0, NS);

    $display("updates: L1 weight steps %0d, L1 threshold rewards %0d, L1 punish %0d, L2 weight steps %0d, L2 punish %0d",
             n_l1_w, n_l1_t_rew, n_pun1, n_l2_w, n_pun2);
    $display("LAS: passed %0d, masked output spikes %0d", n_las_in, n_masked);
    check(n_l1_w > 0, "L1 sign-mode weight steps");
    check(n_l1_t_rew > 0, "L1 fixed-step threshold rewards");
    check(n_l2_w > 0, "L2 sign-mode weight steps");
    check(n_pun2 > 0, "L2 adaptive punishments");
    check(n_las_in > 0, "LAS passed during labels");
    check(n_masked > 0, "output spikes outside labels masked from LAS");
    check(n_bad_las == 0, "no LAS without a pending label");
    $display("accuracy of the test epoch (synthetic samples): %0d of %0d", test_acc, NS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
