// leaky_accumulator: the decaying trace of one synapse.
//
// On the first clock at which the synchronised event i_event is seen high,
// the counter is loaded with its own value plus the decay constant C (an
// adder feeding the counter's load input, as in the paper's figure), so two
// close spikes add up. On every other clock the value decays: by one per
// clock (linear decay, the paper's choice, EXP_DECAY = 0) or by halving
// (exponential decay, EXP_DECAY = 1, with C = 2^tau - 1) until it reaches 0.
// A linear trace therefore falls from C to 0 in C clocks.
//
// CLR_DELAY clocks after the load, o_clr goes low for one clock. It clears
// the synchronizer in front of the accumulator so that the next event can
// be taken.
//
// The counter is CNT_W+1 bits wide: the paper gives a CNT_W-bit counter with
// C = 2^CNT_W - 1 and also lets a second spike lift the value above C; the
// extra bit holds that sum, and the sum saturates at 2^(CNT_W+1)-1. Both the
// extra bit and the saturation are this design's choice.
//
// Ports: i_clk, i_rst_n (async), i_event (synchronised level), o_ln (trace),
// o_clr (active-low re-arm pulse, registered).
module leaky_accumulator #(
  parameter int unsigned CNT_W     = 6,
  parameter int unsigned C         = 63,
  parameter bit          EXP_DECAY = 1'b0,
  parameter int unsigned CLR_DELAY = 3
) (
  input  logic             i_clk,
  input  logic             i_rst_n,
  input  logic             i_event,
  output logic [CNT_W:0]   o_ln,
  output logic             o_clr
);

  localparam int unsigned ACC_W  = CNT_W + 1;
  localparam int unsigned ACCMAX = (1 << ACC_W) - 1;
  localparam int unsigned DCW    = $clog2(CLR_DELAY + 1);

  logic             r_event_d;
  logic             w_load;
  logic [ACC_W:0]   w_sum;
  logic [DCW-1:0]   r_clr_cnt;

  assign w_load = i_event & ~r_event_d;
  assign w_sum  = {1'b0, o_ln} + (ACC_W+1)'(C);

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_event_d <= 1'b0;
      o_ln      <= '0;
    end else begin
      r_event_d <= i_event;
      if (w_load)
        o_ln <= (w_sum > (ACC_W+1)'(ACCMAX)) ? ACC_W'(ACCMAX) : w_sum[ACC_W-1:0];
      else if (o_ln != '0)
        o_ln <= EXP_DECAY ? (o_ln >> 1) : (o_ln - 1'b1);
    end
  end

  // Clear pulse for the synchronizer, CLR_DELAY clocks after the load.
  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_clr_cnt <= '0;
      o_clr     <= 1'b1;
    end else begin
      if (w_load)
        r_clr_cnt <= DCW'(1);
      else if (r_clr_cnt == DCW'(CLR_DELAY))
        r_clr_cnt <= '0;
      else if (r_clr_cnt != '0)
        r_clr_cnt <= r_clr_cnt + 1'b1;
      o_clr <= !((r_clr_cnt == DCW'(CLR_DELAY - 1)) && !w_load);
    end
  end

endmodule
