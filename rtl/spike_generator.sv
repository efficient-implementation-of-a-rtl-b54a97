// spike_generator: turns a comparator output into a clean, one-clock
// output spike, and only inside the window that follows an input event.
//
// Two flip-flops, as in the paper's figure. The first samples the
// comparator trigger on the falling edge of i_clk, which lets a glitching
// combinational trigger settle for half a period; it is held clear while the
// output spike is high (fed back through an inverter). The second re-times
// it on the rising edge and is held clear while i_spike_enable is low, so a
// trigger outside the window opened by an input event cannot make a spike.
// Once the output has fired, the first flip-flop is cleared and the next
// rising edge ends the spike, so each spike lasts exactly one clock.
//
// Ports: i_clk, i_rst_n (async), i_trigger, i_spike_enable, o_spike_out.
// Latency: a trigger present at a falling edge appears at the next rising
// edge.
module spike_generator (
  input  logic i_clk,
  input  logic i_rst_n,
  input  logic i_trigger,
  input  logic i_spike_enable,
  output logic o_spike_out
);

  logic r_trig;
  logic w_clr1_n;
  logic w_clr2_n;

  assign w_clr1_n = i_rst_n & ~o_spike_out;
  assign w_clr2_n = i_rst_n & i_spike_enable;

  always_ff @(negedge i_clk or negedge w_clr1_n) begin
    if (!w_clr1_n) r_trig <= 1'b0;
    else           r_trig <= i_trigger;
  end

  always_ff @(posedge i_clk or negedge w_clr2_n) begin
    if (!w_clr2_n) o_spike_out <= 1'b0;
    else           o_spike_out <= r_trig;
  end

endmodule
