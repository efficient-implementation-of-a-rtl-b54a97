// neuron: N_SYN synapses, an adder, a threshold comparator and the
// LAST_VALUE (LV) register.
//
// The synapse outputs are summed into the membrane potential (the integer
// dot product of weights and traces). The neuron's output is the potential
// when it is at least the threshold held in the trainer, and 0 otherwise:
//   o_neuron_out = (sum >= T) ? sum : 0
// i_spike is this neuron's own output spike fed back from the layer's spike
// generator; when it rises, the potential is copied into LV (o_lv). In the
// paper the LV flip-flop is clocked by i_spike itself; here the rising edge of
// i_spike is detected on i_clk and LV takes the potential present while the
// spike is high, which avoids a second clock domain.
//
// The potential is POT_W bits wide (21 in the paper's figure); the default
// sizes (8 x 15-bit products) need 18 bits, so it cannot overflow.
//
// Ports: i_clk, i_rst_n, i_event[N_SYN], i_weight[N_SYN], i_threshold,
// i_spike, o_neuron_out (combinational), o_lv, o_trace[N_SYN] (TS of each
// synapse), o_sync[N_SYN] (synchronised input events).
module neuron #(
  parameter int unsigned N_SYN     = 8,
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned C         = 63,
  parameter int unsigned W_W       = 8,
  parameter int unsigned POT_W     = 21,
  parameter bit          EXP_DECAY = 1'b0
) (
  input  logic                            i_clk,
  input  logic                            i_rst_n,
  input  logic [N_SYN-1:0]                i_event,
  input  logic [N_SYN-1:0][W_W-1:0]       i_weight,
  input  logic [POT_W-1:0]                i_threshold,
  input  logic                            i_spike,
  output logic [POT_W-1:0]                o_neuron_out,
  output logic [POT_W-1:0]                o_lv,
  output logic [N_SYN-1:0][CNT_W:0]       o_trace,
  output logic [N_SYN-1:0]                o_sync
);

  localparam int unsigned PROD_W = W_W + CNT_W + 1;

  logic [N_SYN-1:0][PROD_W-1:0] w_syn_out;
  logic [POT_W-1:0]             w_sum;
  logic                         r_spike_d;

  for (genvar i = 0; i < N_SYN; i++) begin : g_syn
    synapse #(
      .CNT_W     (CNT_W),
      .C         (C),
      .W_W       (W_W),
      .EXP_DECAY (EXP_DECAY)
    ) u_syn (
      .i_clk         (i_clk),
      .i_rst_n       (i_rst_n),
      .i_event       (i_event[i]),
      .i_weight      (i_weight[i]),
      .o_synapse_out (w_syn_out[i]),
      .o_trace       (o_trace[i]),
      .o_sync        (o_sync[i])
    );
  end

  always_comb begin
    w_sum = '0;
    for (int i = 0; i < N_SYN; i++) w_sum = w_sum + POT_W'(w_syn_out[i]);
  end

  assign o_neuron_out = (w_sum >= i_threshold) ? w_sum : '0;

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_spike_d <= 1'b0;
      o_lv      <= '0;
    end else begin
      r_spike_d <= i_spike;
      if (i_spike && !r_spike_d) o_lv <= w_sum;
    end
  end

endmodule
