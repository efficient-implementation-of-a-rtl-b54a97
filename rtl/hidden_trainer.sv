// hidden_trainer: training logic of a hidden (or input) layer, with its
// weight/threshold register bank.
//
// Inputs are the layer's own events and spikes, the Global Attention Signal
// (GAS, a label is present) and the Local Attention Signal (LAS, the next
// layer spiked). GAS and LAS arrive from other clock domains, so each is
// caught by a synchronizer and held ("latched", r_GAS / r_LAS) until this
// block clears it.
//
// Per input event (IS_EVENT) or new GAS, a counter waits PASS clocks
// (delta_t_pass, 3 in the paper), then for one clock (r_PASS):
//   r_GAS and the layer spiked      -> reward the winner
//   r_GAS and the layer was silent  -> punish all neurons, and copy each
//                                      neuron's current trace into its
//                                      NO_WINNER register
// and one clock later r_STOP_N clears r_GAS and the winner flags.
// When r_LAS is set (and no r_PASS clock is running), every neuron j is
//   rewarded  if its trace is above TRACE_LIM (10% of full scale),
//   punished  else if its NO_WINNER register is above TRACE_LIM
// and r_LAS is cleared. The trace of neuron j is the trace of its own output
// spike, read from synapse j of the next layer (i_next_trace).
//
// When neuron j spikes, the traces of the layer's inputs are copied into its
// time-surface registers TS[j]; its LV is kept by the neuron itself.
// Updates happen only while i_train_en is high. o_reward / o_punish pulse
// for one clock whenever any neuron is rewarded / punished.
module hidden_trainer
  import odesa_pkg::*;
#(
  parameter int unsigned N_NEUR    = 2,
  parameter int unsigned N_SYN     = 8,
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned NCNT_W    = 6,
  parameter int unsigned W_W       = 8,
  parameter int unsigned POT_W     = 21,
  parameter upd_mode_e   W_MODE    = UPD_SHIFT,
  parameter int unsigned W_ETA     = 3,
  parameter upd_mode_e   T_MODE    = UPD_SHIFT,
  parameter int unsigned T_ETA     = 3,
  parameter dt_mode_e    DT_MODE   = DT_FIXED,
  parameter int unsigned DELTA_T   = 63,
  parameter int unsigned PASS      = 3,
  parameter int unsigned TRACE_LIM = ((1 << NCNT_W) - 1) / 10,
  parameter int unsigned SEED      = 1,
  parameter int unsigned T_INIT    = 0
) (
  input  logic                                   i_clk,
  input  logic                                   i_rst_n,
  input  logic                                   i_train_en,
  input  logic                                   i_is_event,
  input  logic [N_NEUR-1:0]                      i_spike,
  input  logic                                   i_gas,
  input  logic                                   i_las,
  input  logic [N_SYN-1:0][CNT_W:0]              i_trace,
  input  logic [N_NEUR-1:0][POT_W-1:0]           i_lv,
  input  logic [N_NEUR-1:0][NCNT_W:0]            i_next_trace,
  output logic [N_NEUR-1:0][N_SYN-1:0][W_W-1:0]  o_weight,
  output logic [N_NEUR-1:0][POT_W-1:0]           o_threshold,
  output logic                                   o_reward,
  output logic                                   o_punish
);

  localparam int unsigned PCW = $clog2(PASS + 1);

  logic                                 r_gas, r_gas_d, r_las, r_las_busy;
  logic                                 r_stop_n, r_las_clr_n;
  logic [N_NEUR-1:0]                    r_is_winner;
  logic [N_NEUR-1:0][N_SYN-1:0][CNT_W:0] r_ts;
  logic [N_NEUR-1:0][NCNT_W:0]          r_no_winner;
  logic [PCW-1:0]                       r_pass_cnt;
  logic                                 w_pass, w_las_do;
  action_e [N_NEUR-1:0]                 w_act;

  synchronizer u_gas_sync (
    .i_clk (i_clk), .i_rst_n (i_rst_n & r_stop_n), .i_spike (i_gas), .o_spike (r_gas)
  );
  synchronizer u_las_sync (
    .i_clk (i_clk), .i_rst_n (i_rst_n & r_las_clr_n), .i_spike (i_las), .o_spike (r_las)
  );

  assign w_pass   = (r_pass_cnt == PCW'(PASS));
  assign w_las_do = r_las && !r_las_busy && !w_pass;

  // delta_t_pass counter, winner flags, stop pulse.
  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_gas_d     <= 1'b0;
      r_pass_cnt  <= '0;
      r_is_winner <= '0;
      r_stop_n    <= 1'b1;
    end else begin
      r_gas_d  <= r_gas;
      r_stop_n <= !w_pass;
      if (w_pass)
        r_pass_cnt <= '0;
      else if (r_pass_cnt != '0)
        r_pass_cnt <= r_pass_cnt + 1'b1;
      else if (i_is_event || (r_gas && !r_gas_d))
        r_pass_cnt <= PCW'(1);
      if (!r_stop_n)   r_is_winner <= '0;
      else if (|i_spike) r_is_winner <= i_spike;
    end
  end

  // LAS handshake: one update per latched LAS, then clear the synchronizer.
  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_las_busy  <= 1'b0;
      r_las_clr_n <= 1'b1;
    end else begin
      r_las_busy  <= w_las_do;
      r_las_clr_n <= !w_las_do;
    end
  end

  // Time-surface and NO_WINNER registers.
  for (genvar j = 0; j < N_NEUR; j++) begin : g_regs
    always_ff @(posedge i_clk or negedge i_rst_n) begin
      if (!i_rst_n) begin
        r_ts[j]        <= '0;
        r_no_winner[j] <= '0;
      end else begin
        if (i_spike[j]) r_ts[j] <= i_trace;
        if (w_pass && r_gas && !(|r_is_winner))
          r_no_winner[j] <= i_next_trace[j];
        else if (w_las_do && i_train_en && !(i_next_trace[j] > (NCNT_W+1)'(TRACE_LIM)))
          r_no_winner[j] <= '0;
      end
    end
  end

  // Algorithm for hidden layers: one action per neuron per clock.
  always_comb begin
    for (int j = 0; j < N_NEUR; j++) begin
      w_act[j] = ACT_NONE;
      if (i_train_en) begin
        if (w_pass && r_gas) begin
          if (|r_is_winner) w_act[j] = r_is_winner[j] ? ACT_REWARD : ACT_NONE;
          else              w_act[j] = ACT_PUNISH;
        end else if (w_las_do) begin
          if (i_next_trace[j] > (NCNT_W+1)'(TRACE_LIM))
            w_act[j] = ACT_REWARD;
          else if (r_no_winner[j] > (NCNT_W+1)'(TRACE_LIM))
            w_act[j] = ACT_PUNISH;
        end
      end
    end
  end

  always_comb begin
    o_reward = 1'b0;
    o_punish = 1'b0;
    for (int j = 0; j < N_NEUR; j++) begin
      if (w_act[j] == ACT_REWARD) o_reward = 1'b1;
      if (w_act[j] == ACT_PUNISH) o_punish = 1'b1;
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
