// tb_tw_register_bank: self-checking test of the weight and threshold
// register bank and its update arithmetic.
//
// Two instances: A with the shift-and-add rules of the 8__2_4__4 network
// (learning rates 2^-3, fixed threshold punishment 63) and B with the
// fixed-step rules (weight step 2, threshold step 127) and the adaptive
// threshold punishment. Random actions, trace values and LV values are
// applied every clock; a reference model written here, independent of the
// design's package, predicts every register:
//   reward  : w += (ts - w) * rate   (shift: arithmetic shift, at least +-1)
//             T += (LV - T) * rate
//   negative: w -= (ts - w) * rate   (weights only)
//   punish  : T -= dT, dT fixed or, adaptive, 1/15/255/1023 by the size of T
// All results are clamped to the register range. The reset weights must
// differ between the neurons.
module tb_tw_register_bank;
  import odesa_pkg::*;
  localparam int NN = 2, NS = 8, TS_W = 7, W_W = 8, POT_W = 21;
  logic clk = 1'b0, rst_n = 1'b1;
  action_e [NN-1:0]                  act;
  logic [NN-1:0][NS-1:0][TS_W-1:0]   ts;
  logic [NN-1:0][POT_W-1:0]          lv;
  logic [NN-1:0][NS-1:0][W_W-1:0]    wa, wb;
  logic [NN-1:0][POT_W-1:0]          ta, tb;
  int checks = 0, failures = 0;
  int n_rew = 0, n_pun = 0, n_neg = 0;

  tw_register_bank #(.N_NEUR(NN), .N_SYN(NS), .TS_W(TS_W), .W_W(W_W), .POT_W(POT_W),
    .W_MODE(UPD_SHIFT), .W_ETA(3), .T_MODE(UPD_SHIFT), .T_ETA(3),
    .DT_MODE(DT_FIXED), .DELTA_T(63)) dut_a (
    .i_clk(clk), .i_rst_n(rst_n), .i_act(act), .i_ts(ts), .i_lv(lv),
    .o_weight(wa), .o_threshold(ta));
  tw_register_bank #(.N_NEUR(NN), .N_SYN(NS), .TS_W(TS_W), .W_W(W_W), .POT_W(POT_W),
    .W_MODE(UPD_SIGN), .W_ETA(2), .T_MODE(UPD_SIGN), .T_ETA(127),
    .DT_MODE(DT_ADAPTIVE), .DELTA_T(1), .SEED(5), .T_INIT(70000)) dut_b (
    .i_clk(clk), .i_rst_n(rst_n), .i_act(act), .i_ts(ts), .i_lv(lv),
    .o_weight(wb), .o_threshold(tb));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lim(input int v, input int mx);
    return v < 0 ? 0 : (v > mx ? mx : v);
  endfunction

  function automatic int shift_step(input int target, input int cur, input int sh);
    int d = target - cur;
    int q;
    if (d == 0) return 0;
    q = (d >= 0) ? (d / (1 << sh)) : -((-d + (1 << sh) - 1) / (1 << sh));  // floor
    if (q == 0) q = (d > 0) ? 1 : -1;
    return q;
  endfunction

  function automatic int sign_step(input int target, input int cur, input int s);
    return (target > cur) ? s : ((target < cur) ? -s : 0);
  endfunction

  function automatic int adapt(input int t);
    return (t > 65535) ? 1023 : (t > 4095) ? 255 : (t > 255) ? 15 : 1;
  endfunction

  int ewa[NN][NS], ewb[NN][NS], eta_[NN], etb[NN];

  initial begin
    bit differ;
    act = '{default: ACT_NONE};
    ts = '0;
    lv = '0;
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    differ = 0;
    for (int j = 0; j < NN; j++) begin
      for (int i = 0; i < NS; i++) begin
        ewa[j][i] = int'(wa[j][i]);
        ewb[j][i] = int'(wb[j][i]);
        if (wa[0][i] != wa[1][i]) differ = 1;
      end
      eta_[j] = int'(ta[j]);
      etb[j]  = int'(tb[j]);
    end
    check(differ, "reset weights differ between neurons");
    check(ta == '0 && tb[0] == 21'd70000, "reset thresholds");
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int j = 0; j < NN; j++) begin
        act[j] = action_e'($urandom_range(0, 3));
        lv[j]  = POT_W'($urandom_range(0, 150000));
        for (int i = 0; i < NS; i++) ts[j][i] = TS_W'($urandom);
      end
      // model
      for (int j = 0; j < NN; j++) begin
        case (act[j])
          ACT_REWARD: begin
            n_rew++;
            for (int i = 0; i < NS; i++) begin
              ewa[j][i] = lim(ewa[j][i] + shift_step(int'(ts[j][i]), ewa[j][i], 3), 255);
              ewb[j][i] = lim(ewb[j][i] + sign_step(int'(ts[j][i]), ewb[j][i], 2), 255);
            end
            eta_[j] = lim(eta_[j] + shift_step(int'(lv[j]), eta_[j], 3), (1 << POT_W) - 1);
            etb[j]  = lim(etb[j] + sign_step(int'(lv[j]), etb[j], 127), (1 << POT_W) - 1);
          end
          ACT_NEGW: begin
            n_neg++;
            for (int i = 0; i < NS; i++) begin
              ewa[j][i] = lim(ewa[j][i] - shift_step(int'(ts[j][i]), ewa[j][i], 3), 255);
              ewb[j][i] = lim(ewb[j][i] - sign_step(int'(ts[j][i]), ewb[j][i], 2), 255);
            end
          end
          ACT_PUNISH: begin
            n_pun++;
            eta_[j] = lim(eta_[j] - 63, (1 << POT_W) - 1);
            etb[j]  = lim(etb[j] - adapt(etb[j]), (1 << POT_W) - 1);
          end
          default: ;
        endcase
      end
      @(posedge clk); #1;
      for (int j = 0; j < NN; j++) begin
        for (int i = 0; i < NS; i++) begin
          check(int'(wa[j][i]) == ewa[j][i], $sformatf("A w[%0d][%0d]=%0d exp %0d", j, i, wa[j][i], ewa[j][i]));
          check(int'(wb[j][i]) == ewb[j][i], $sformatf("B w[%0d][%0d]=%0d exp %0d", j, i, wb[j][i], ewb[j][i]));
        end
        check(int'(ta[j]) == eta_[j], $sformatf("A T[%0d]=%0d exp %0d", j, ta[j], eta_[j]));
        check(int'(tb[j]) == etb[j], $sformatf("B T[%0d]=%0d exp %0d", j, tb[j], etb[j]));
      end
    end
    check(n_rew > 100 && n_pun > 100 && n_neg > 100, "all actions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
