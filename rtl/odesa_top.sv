// odesa_top: a two-layer ODESA spiking network that trains itself on chip.
//
// Configuration ODESA N_IN__N_L1_N_CLS__N_CLS; the defaults are the
// 8__2_4__4 network (8 input lines, 2 hidden neurons, 4 output neurons, one
// per class) with the learning parameters of that experiment.
//
//   event_source --events--> L1 odesa_layer --spikes--> L2 odesa_layer --> o_spike
//        |  (RAM + sequencer + mux)   |   ^                  |   ^
//        |                     LV,TS  v   | T,W        LV,TS v   | T,W
//        +--GAS--------------> hidden_trainer  <--LAS--  output_trainer <--GAS,LABEL
//
// Clocks: clock_divider makes clk_l1 = i_clk / DIV_L1 and
// clk_l2 = clk_l1 / RATIO_L2. The event source, layer L1 and its trainer run
// on clk_l1; layer L2 and its trainer on clk_l2. Signals between the
// domains are spikes (L1 output -> L2 synapses, L2 IS_WINNER -> L1 LAS,
// GAS -> both trainers), and each is caught by a synchronizer at the
// receiving side. The traces that the L1 trainer reads from L2 are sampled
// on clk_l1 edges, which always coincide with clk_l2 edges.
//
// Operation: load the training set into the RAM through the write port
// (i_wr_*), set i_len (words per epoch) and i_epochs, raise i_use_ram and
// i_train_en. The set is replayed i_epochs times while both trainers adapt
// weights and thresholds. Lower i_train_en and replay a labelled test set
// to measure accuracy (o_eval_cnt / o_match_cnt count labelled inputs and
// correct winners), or lower i_use_ram to classify i_events. The o_l1_* and
// o_l2_* outputs pulse, in their layer's clock, on every reward, punishment
// and negative weight update, for monitoring.
//
// LAS_AFTER_GAS = 1 passes the L2 spikes to the L1 trainer as LAS only
// while a label is pending, a training speed-up used for harder data sets.
// PASS2 (delta_t_pass of the output trainer) is counted from the label, so
// it covers the latency of L1 as well as of L2; the paper's value 3 is
// measured from the layer's own input event.
module odesa_top
  import odesa_pkg::*;
#(
  parameter int unsigned N_IN          = 8,
  parameter int unsigned N_L1          = 2,
  parameter int unsigned N_CLS         = 4,
  parameter int unsigned CNT_W1        = 6,
  parameter int unsigned C1            = 63,
  parameter int unsigned CNT_W2        = 6,
  parameter int unsigned C2            = 63,
  parameter int unsigned W_W           = 8,
  parameter int unsigned POT_W         = 21,
  parameter int unsigned SPK_WIN       = 4,
  parameter upd_mode_e   W_MODE1       = UPD_SHIFT,
  parameter int unsigned W_ETA1        = 3,
  parameter upd_mode_e   T_MODE1       = UPD_SHIFT,
  parameter int unsigned T_ETA1        = 3,
  parameter dt_mode_e    DT_MODE1      = DT_FIXED,
  parameter int unsigned DELTA_T1      = 63,
  parameter int unsigned PASS1         = 3,
  parameter upd_mode_e   W_MODE2       = UPD_SHIFT,
  parameter int unsigned W_ETA2        = 2,
  parameter upd_mode_e   T_MODE2       = UPD_SHIFT,
  parameter int unsigned T_ETA2        = 2,
  parameter dt_mode_e    DT_MODE2      = DT_FIXED,
  parameter int unsigned DELTA_T2      = 63,
  parameter int unsigned PASS2         = 6,
  parameter int unsigned T_INIT1       = 0,
  parameter int unsigned T_INIT2       = 0,
  parameter bit          LAS_AFTER_GAS = 1'b0,
  parameter int unsigned DIV_L1        = 20,
  parameter int unsigned RATIO_L2      = 2,
  parameter int unsigned DEPTH         = 2048,
  parameter int unsigned ADDR_W        = $clog2(DEPTH),
  parameter int unsigned EP_W          = 16
) (
  input  logic                    i_clk,
  input  logic                    i_rst_n,
  input  logic                    i_use_ram,
  input  logic                    i_train_en,
  input  logic [N_IN-1:0]         i_events,
  input  logic [ADDR_W:0]         i_len,
  input  logic [EP_W-1:0]         i_epochs,
  input  logic                    i_wr_en,
  input  logic [ADDR_W-1:0]       i_wr_addr,
  input  logic [N_IN+N_CLS-1:0]   i_wr_data,
  output logic [N_CLS-1:0]        o_spike,
  output logic [N_L1-1:0]         o_l1_spike,
  output logic [EP_W-1:0]         o_epoch,
  output logic                    o_done,
  output logic [31:0]             o_eval_cnt,
  output logic [31:0]             o_match_cnt,
  output logic                    o_l1_winner,
  output logic                    o_l1_reward,
  output logic                    o_l1_punish,
  output logic                    o_l2_reward,
  output logic                    o_l2_punish,
  output logic                    o_l2_negw,
  output logic                    o_clk_l1,
  output logic                    o_clk_l2
);

  logic                                   clk_l1, clk_l2;
  logic [N_IN-1:0]                        w_events;
  logic [N_CLS-1:0]                       w_label;
  logic                                   w_gas;

  logic [N_L1-1:0][N_IN-1:0][W_W-1:0]     w_w1;
  logic [N_L1-1:0][POT_W-1:0]             w_t1, w_lv1;
  logic [N_IN-1:0][CNT_W1:0]              w_trace1;
  logic                                   w_ev1, w_win1;

  logic [N_CLS-1:0][N_L1-1:0][W_W-1:0]    w_w2;
  logic [N_CLS-1:0][POT_W-1:0]            w_t2, w_lv2;
  logic [N_L1-1:0][CNT_W2:0]              w_trace2;
  logic                                   w_win2;
  logic                                   w_eval, w_match, w_gas_pending, w_las;

  clock_divider #(
    .DIV_L1 (DIV_L1), .RATIO_L2 (RATIO_L2)
  ) u_clkdiv (
    .i_clk (i_clk), .i_rst_n (i_rst_n), .o_clk_l1 (clk_l1), .o_clk_l2 (clk_l2)
  );
  assign o_clk_l1 = clk_l1;
  assign o_clk_l2 = clk_l2;

  event_source #(
    .N_IN (N_IN), .N_CLS (N_CLS), .DEPTH (DEPTH), .ADDR_W (ADDR_W), .EP_W (EP_W)
  ) u_src (
    .i_clk     (clk_l1),
    .i_rst_n   (i_rst_n),
    .i_use_ram (i_use_ram),
    .i_len     (i_len),
    .i_epochs  (i_epochs),
    .i_events  (i_events),
    .i_wr_clk  (i_clk),
    .i_wr_en   (i_wr_en),
    .i_wr_addr (i_wr_addr),
    .i_wr_data (i_wr_data),
    .o_events  (w_events),
    .o_label   (w_label),
    .o_gas     (w_gas),
    .o_epoch   (o_epoch),
    .o_done    (o_done)
  );

  // ---------------- layer L1 (input / hidden) ----------------
  odesa_layer #(
    .N_SYN (N_IN), .N_NEUR (N_L1), .CNT_W (CNT_W1), .C (C1), .W_W (W_W),
    .POT_W (POT_W), .SPK_WIN (SPK_WIN)
  ) u_l1 (
    .i_clk       (clk_l1),
    .i_rst_n     (i_rst_n),
    .i_event     (w_events),
    .i_weight    (w_w1),
    .i_threshold (w_t1),
    .o_spike     (o_l1_spike),
    .o_is_event  (w_ev1),
    .o_is_winner (w_win1),
    .o_lv        (w_lv1),
    .o_trace     (w_trace1)
  );

  assign o_l1_winner = w_win1;
  assign w_las = w_win2 & (!LAS_AFTER_GAS | w_gas_pending);

  hidden_trainer #(
    .N_NEUR (N_L1), .N_SYN (N_IN), .CNT_W (CNT_W1), .NCNT_W (CNT_W2), .W_W (W_W),
    .POT_W (POT_W), .W_MODE (W_MODE1), .W_ETA (W_ETA1), .T_MODE (T_MODE1),
    .T_ETA (T_ETA1), .DT_MODE (DT_MODE1), .DELTA_T (DELTA_T1), .PASS (PASS1),
    .SEED (1), .T_INIT (T_INIT1)
  ) u_tr1 (
    .i_clk        (clk_l1),
    .i_rst_n      (i_rst_n),
    .i_train_en   (i_train_en),
    .i_is_event   (w_ev1),
    .i_spike      (o_l1_spike),
    .i_gas        (w_gas),
    .i_las        (w_las),
    .i_trace      (w_trace1),
    .i_lv         (w_lv1),
    .i_next_trace (w_trace2),
    .o_weight     (w_w1),
    .o_threshold  (w_t1),
    .o_reward     (o_l1_reward),
    .o_punish     (o_l1_punish)
  );

  // ---------------- layer L2 (output) ----------------
  odesa_layer #(
    .N_SYN (N_L1), .N_NEUR (N_CLS), .CNT_W (CNT_W2), .C (C2), .W_W (W_W),
    .POT_W (POT_W), .SPK_WIN (SPK_WIN)
  ) u_l2 (
    .i_clk       (clk_l2),
    .i_rst_n     (i_rst_n),
    .i_event     (o_l1_spike),
    .i_weight    (w_w2),
    .i_threshold (w_t2),
    .o_spike     (o_spike),
    .o_is_event  (),
    .o_is_winner (w_win2),
    .o_lv        (w_lv2),
    .o_trace     (w_trace2)
  );

  output_trainer #(
    .N_NEUR (N_CLS), .N_SYN (N_L1), .CNT_W (CNT_W2), .W_W (W_W), .POT_W (POT_W),
    .W_MODE (W_MODE2), .W_ETA (W_ETA2), .T_MODE (T_MODE2), .T_ETA (T_ETA2),
    .DT_MODE (DT_MODE2), .DELTA_T (DELTA_T2), .PASS (PASS2), .SEED (2),
    .T_INIT (T_INIT2)
  ) u_tr2 (
    .i_clk         (clk_l2),
    .i_rst_n       (i_rst_n),
    .i_train_en    (i_train_en),
    .i_gas         (w_gas),
    .i_label       (w_label),
    .i_spike       (o_spike),
    .i_trace       (w_trace2),
    .i_lv          (w_lv2),
    .o_weight      (w_w2),
    .o_threshold   (w_t2),
    .o_eval        (w_eval),
    .o_match       (w_match),
    .o_gas_pending (w_gas_pending),
    .o_reward      (o_l2_reward),
    .o_punish      (o_l2_punish),
    .o_negw        (o_l2_negw)
  );

  // Accuracy counters.
  always_ff @(posedge clk_l2 or negedge i_rst_n) begin
    if (!i_rst_n) begin
      o_eval_cnt  <= '0;
      o_match_cnt <= '0;
    end else begin
      if (w_eval)  o_eval_cnt  <= o_eval_cnt + 1'b1;
      if (w_match) o_match_cnt <= o_match_cnt + 1'b1;
    end
  end

endmodule
