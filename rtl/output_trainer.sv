// output_trainer: training logic of the output (classification) layer,
// with its weight/threshold register bank.
//
// The one-hot label arrives with the Global Attention Signal (GAS = OR of
// the label bits). On the rising edge of GAS the label is latched (r_label,
// a flip-flop clocked by GAS itself, as in the paper's timing diagram), and
// GAS is caught by a synchronizer (r_GAS). The first output spike seen
// while r_GAS is set is latched as r_WINNER, together with the traces of
// the layer's inputs (TS). PASS clocks (delta_t_pass) after r_GAS rose, for
// one clock (r_PASS), the winner is compared with the label:
//   WINNER == LABEL  -> reward the label neuron
//   no WINNER        -> punish the label neuron
//   other WINNER     -> negative weight update of the winner and punish the
//                       label neuron
// One clock later r_STOP_N clears r_GAS, r_label and r_WINNER.
//
// PASS counts from r_GAS, which rises with the label at the input of the
// network, so it must cover the latency of the layers in front (see the
// network's top module). o_eval pulses at each comparison and o_match when
// the winner equals the label, whether or not training is enabled; a test
// run uses them to count accuracy. o_gas_pending is r_GAS (used to gate the
// LAS sent to the previous layer). Weights and thresholds change only while
// i_train_en is high.
module output_trainer
  import odesa_pkg::*;
#(
  parameter int unsigned N_NEUR  = 4,
  parameter int unsigned N_SYN   = 2,
  parameter int unsigned CNT_W   = 6,
  parameter int unsigned W_W     = 8,
  parameter int unsigned POT_W   = 21,
  parameter upd_mode_e   W_MODE  = UPD_SHIFT,
  parameter int unsigned W_ETA   = 2,
  parameter upd_mode_e   T_MODE  = UPD_SHIFT,
  parameter int unsigned T_ETA   = 2,
  parameter dt_mode_e    DT_MODE = DT_FIXED,
  parameter int unsigned DELTA_T = 63,
  parameter int unsigned PASS    = 6,
  parameter int unsigned SEED    = 2,
  parameter int unsigned T_INIT  = 0
) (
  input  logic                                   i_clk,
  input  logic                                   i_rst_n,
  input  logic                                   i_train_en,
  input  logic                                   i_gas,
  input  logic [N_NEUR-1:0]                      i_label,
  input  logic [N_NEUR-1:0]                      i_spike,
  input  logic [N_SYN-1:0][CNT_W:0]              i_trace,
  input  logic [N_NEUR-1:0][POT_W-1:0]           i_lv,
  output logic [N_NEUR-1:0][N_SYN-1:0][W_W-1:0]  o_weight,
  output logic [N_NEUR-1:0][POT_W-1:0]           o_threshold,
  output logic                                   o_eval,
  output logic                                   o_match,
  output logic                                   o_gas_pending,
  output logic                                   o_reward,
  output logic                                   o_punish,
  output logic                                   o_negw
);

  localparam int unsigned PCW = $clog2(PASS + 1);

  logic                                  r_gas, r_gas_d, r_stop_n;
  logic [N_NEUR-1:0]                     r_label, r_winner;
  logic [N_NEUR-1:0][N_SYN-1:0][CNT_W:0] r_ts;
  logic [PCW-1:0]                        r_pass_cnt;
  logic                                  w_pass;
  action_e [N_NEUR-1:0]                  w_act;

  synchronizer u_gas_sync (
    .i_clk (i_clk), .i_rst_n (i_rst_n & r_stop_n), .i_spike (i_gas), .o_spike (r_gas)
  );

  // r_label is clocked by GAS itself (Fig. 14) and cleared with r_STOP_N.
  logic w_lab_clr_n;
  assign w_lab_clr_n = i_rst_n & r_stop_n;

  always_ff @(posedge i_gas or negedge w_lab_clr_n) begin
    if (!w_lab_clr_n) r_label <= '0;
    else              r_label <= i_label;
  end

  assign w_pass        = (r_pass_cnt == PCW'(PASS));
  assign o_gas_pending = r_gas;

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_gas_d    <= 1'b0;
      r_pass_cnt <= '0;
      r_winner   <= '0;
      r_stop_n   <= 1'b1;
    end else begin
      r_gas_d  <= r_gas;
      r_stop_n <= !w_pass;
      if (w_pass)
        r_pass_cnt <= '0;
      else if (r_pass_cnt != '0)
        r_pass_cnt <= r_pass_cnt + 1'b1;
      else if (r_gas && !r_gas_d)
        r_pass_cnt <= PCW'(1);
      if (!r_stop_n)                          r_winner <= '0;
      else if (r_gas && (|i_spike) && !(|r_winner)) r_winner <= i_spike;
    end
  end

  for (genvar j = 0; j < N_NEUR; j++) begin : g_ts
    always_ff @(posedge i_clk or negedge i_rst_n) begin
      if (!i_rst_n)        r_ts[j] <= '0;
      else if (i_spike[j]) r_ts[j] <= i_trace;
    end
  end

  assign o_eval  = w_pass && (|r_label);
  assign o_match = o_eval && (r_winner == r_label);

  // Algorithm for the output layer.
  always_comb begin
    for (int j = 0; j < N_NEUR; j++) begin
      w_act[j] = ACT_NONE;
      if (i_train_en && o_eval) begin
        if (r_winner == r_label)
          w_act[j] = r_label[j] ? ACT_REWARD : ACT_NONE;
        else if (r_winner == '0)
          w_act[j] = r_label[j] ? ACT_PUNISH : ACT_NONE;
        else if (r_winner[j])
          w_act[j] = ACT_NEGW;
        else if (r_label[j])
          w_act[j] = ACT_PUNISH;
      end
    end
  end

  always_comb begin
    o_reward = 1'b0;
    o_punish = 1'b0;
    o_negw   = 1'b0;
    for (int j = 0; j < N_NEUR; j++) begin
      if (w_act[j] == ACT_REWARD) o_reward = 1'b1;
      if (w_act[j] == ACT_PUNISH) o_punish = 1'b1;
      if (w_act[j] == ACT_NEGW)   o_negw   = 1'b1;
    end
  end

  tw_register_bank #(
    .N_NEUR (N_NEUR), .N_SYN (N_SYN), .TS_W (CNT_W + 1), .W_W (W_W), .POT_W (POT_W),
    .W_MODE (W_MODE), .W_ETA (W_ETA), .T_MODE (T_MODE), .T_ETA (T_ETA),
    .DT_MODE (DT_MODE), .DELTA_T (DELTA_T), .SEED (SEED), .T_INIT (T_INIT)
  ) u_bank (
    .i_clk       (i_clk),
    .i_rst_n     (i_rst_n),
    .i_act       (w_act),
    .i_ts        (r_ts),
    .i_lv        (i_lv),
    .o_weight    (o_weight),
    .o_threshold (o_threshold)
  );

endmodule
