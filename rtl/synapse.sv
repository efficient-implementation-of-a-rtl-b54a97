// synapse: one weighted, decaying input of a neuron.
//
// Structure as in the paper's synapse figure: a synchronizer catches the
// input spike, a leaky accumulator turns it into a decaying trace a(t), a
// multiplier scales the trace by the weight w held in the trainer's register
// bank, and a TRACE register keeps a registered copy of a(t) for the trainers
// (the time surface, TS).
//
//   o_synapse_out = i_weight * a(t)        (combinational, unsigned)
//   o_trace       = a(t) one clock later
//
// The synchronizer is re-armed by the accumulator's o_clr pulse. o_sync, the
// synchronised event level, is brought out so that the layer can build its
// IS_EVENT signal from it (a port this design adds).
//
// Ports: i_clk, i_rst_n, i_event (async spike), i_weight, o_synapse_out,
// o_trace, o_sync. Latency: the trace is loaded one clock after o_sync rises.
module synapse #(
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned C         = 63,
  parameter int unsigned W_W       = 8,
  parameter bit          EXP_DECAY = 1'b0
) (
  input  logic                 i_clk,
  input  logic                 i_rst_n,
  input  logic                 i_event,
  input  logic [W_W-1:0]       i_weight,
  output logic [W_W+CNT_W:0]   o_synapse_out,
  output logic [CNT_W:0]       o_trace,
  output logic                 o_sync
);

  logic             w_clr_n;
  logic             w_sync_rst_n;
  logic [CNT_W:0]   w_ln;

  assign w_sync_rst_n = i_rst_n & w_clr_n;

  synchronizer u_sync (
    .i_clk   (i_clk),
    .i_rst_n (w_sync_rst_n),
    .i_spike (i_event),
    .o_spike (o_sync)
  );

  leaky_accumulator #(
    .CNT_W     (CNT_W),
    .C         (C),
    .EXP_DECAY (EXP_DECAY)
  ) u_acc (
    .i_clk   (i_clk),
    .i_rst_n (i_rst_n),
    .i_event (o_sync),
    .o_ln    (w_ln),
    .o_clr   (w_clr_n)
  );

  assign o_synapse_out = (W_W+CNT_W+1)'(i_weight) * (W_W+CNT_W+1)'(w_ln);

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) o_trace <= '0;
    else          o_trace <= w_ln;
  end

endmodule
