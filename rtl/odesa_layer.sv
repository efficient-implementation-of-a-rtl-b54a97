// odesa_layer: one layer of the ODESA network, with a hard winner-takes-all
// output.
//
// N_NEUR neurons share the layer's N_SYN input spike lines. Their outputs go
// to the comparator, whose one-hot winner passes through one spike
// generator per neuron. An output spike is only allowed inside a window of
// SPK_WIN clocks (4 in the paper) that opens when an input event is seen;
// this removes spikes that the combinational comparator could produce when
// no input arrived. The window closes at the first output spike, so every
// input event yields at most one output spike in the whole layer (this early
// close is this design's choice; it makes the WTA rule strict).
//
// IS_EVENT is the OR of the rising edges of the synchronised inputs of
// neuron 0 (every neuron sees the same inputs). o_is_winner is the OR of the
// output spikes; it is the layer's IS_WINNER, the next layer's input events
// and, for the layer before, its Local Attention Signal.
//
// Timing, in clocks of this layer, after an input spike:
//   edge k   : synchroniser output rises, o_is_event high until k+1
//   edge k+1 : traces loaded, potentials valid, window opens
//   edge k+2 : output spike (one clock) if a neuron crossed its threshold
//
// o_trace are the traces of the layer's input synapses (taken from neuron
// 0; the accumulators of all neurons hold the same values because they see
// the same spikes). The previous layer's trainer uses trace j as the trace
// of its own neuron j.
//
// Assertion: the output spikes are one-hot or zero.
module odesa_layer #(
  parameter int unsigned N_SYN     = 8,
  parameter int unsigned N_NEUR    = 2,
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned C         = 63,
  parameter int unsigned W_W       = 8,
  parameter int unsigned POT_W     = 21,
  parameter int unsigned SPK_WIN   = 4,
  parameter bit          EXP_DECAY = 1'b0
) (
  input  logic                                   i_clk,
  input  logic                                   i_rst_n,
  input  logic [N_SYN-1:0]                       i_event,
  input  logic [N_NEUR-1:0][N_SYN-1:0][W_W-1:0]  i_weight,
  input  logic [N_NEUR-1:0][POT_W-1:0]           i_threshold,
  output logic [N_NEUR-1:0]                      o_spike,
  output logic                                   o_is_event,
  output logic                                   o_is_winner,
  output logic [N_NEUR-1:0][POT_W-1:0]           o_lv,
  output logic [N_SYN-1:0][CNT_W:0]              o_trace
);

  localparam int unsigned WCW = $clog2(SPK_WIN + 1);

  logic [N_NEUR-1:0][POT_W-1:0]          w_neuron_out;
  logic [N_NEUR-1:0][N_SYN-1:0][CNT_W:0] w_trace;
  logic [N_NEUR-1:0][N_SYN-1:0]          w_sync;
  logic [N_SYN-1:0]                      r_sync_d;
  logic [N_NEUR-1:0]                     w_trigger;
  logic [WCW-1:0]                        r_win;
  logic                                  w_enable;

  for (genvar j = 0; j < N_NEUR; j++) begin : g_neuron
    neuron #(
      .N_SYN     (N_SYN),
      .CNT_W     (CNT_W),
      .C         (C),
      .W_W       (W_W),
      .POT_W     (POT_W),
      .EXP_DECAY (EXP_DECAY)
    ) u_neuron (
      .i_clk        (i_clk),
      .i_rst_n      (i_rst_n),
      .i_event      (i_event),
      .i_weight     (i_weight[j]),
      .i_threshold  (i_threshold[j]),
      .i_spike      (o_spike[j]),
      .o_neuron_out (w_neuron_out[j]),
      .o_lv         (o_lv[j]),
      .o_trace      (w_trace[j]),
      .o_sync       (w_sync[j])
    );
  end

  assign o_trace = w_trace[0];

  // IS_EVENT: a new synchronised input on any line.
  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) r_sync_d <= '0;
    else          r_sync_d <= w_sync[0];
  end
  assign o_is_event = |(w_sync[0] & ~r_sync_d);

  // Spike window: SPK_WIN clocks after IS_EVENT, closed by the first spike.
  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n)        r_win <= '0;
    else if (o_is_event) r_win <= WCW'(SPK_WIN);
    else if (|o_spike)   r_win <= '0;
    else if (r_win != 0) r_win <= r_win - 1'b1;
  end
  assign w_enable = (r_win != '0);

  comparator #(
    .N     (N_NEUR),
    .POT_W (POT_W)
  ) u_cmp (
    .i_neuron_out (w_neuron_out),
    .o_trigger    (w_trigger)
  );

  for (genvar j = 0; j < N_NEUR; j++) begin : g_spkgen
    spike_generator u_spkgen (
      .i_clk          (i_clk),
      .i_rst_n        (i_rst_n),
      .i_trigger      (w_trigger[j]),
      .i_spike_enable (w_enable),
      .o_spike_out    (o_spike[j])
    );
  end

  assign o_is_winner = |o_spike;

  a_wta : assert property (@(posedge i_clk) disable iff (!i_rst_n) $onehot0(o_spike))
    else $error("odesa_layer: more than one output spike");

endmodule
