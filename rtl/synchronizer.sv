// synchronizer: captures an asynchronous spike and holds it, synchronous to
// the layer clock, until it is cleared.
//
// Two flip-flops, as in the paper's figure: the first is clocked by the spike
// itself with its data input tied to 1, so even a spike much shorter than a
// clock period is caught; the second re-times that flag to i_clk. o_spike
// rises at the first i_clk rising edge after the spike and stays high until
// i_rst_n (active low, asynchronous) clears both flip-flops. While it is
// high, further spikes are ignored; that lets the logic that drives i_rst_n
// decide when the next event may be accepted. Inside a synapse i_rst_n is the
// global reset ANDed with the leaky accumulator's o_clr pulse.
//
// Ports: i_clk, i_rst_n (async clear), i_spike (async input), o_spike.
// Latency: o_spike rises at the first i_clk edge after i_spike rises
// (metastability is not modelled; an FPGA build would add a second stage if
// the spike is truly asynchronous).
module synchronizer (
  input  logic i_clk,
  input  logic i_rst_n,
  input  logic i_spike,
  output logic o_spike
);

  logic r_capt;

  always_ff @(posedge i_spike or negedge i_rst_n) begin
    if (!i_rst_n) r_capt <= 1'b0;
    else          r_capt <= 1'b1;
  end

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) o_spike <= 1'b0;
    else          o_spike <= r_capt;
  end

endmodule
