// clock_divider: derives the layer clocks from the system clock.
//
// ODESA layers run at different clock rates (each layer's clock sets the
// decay speed of its traces). clk_l1 = i_clk / DIV_L1 and
// clk_l2 = clk_l1 / RATIO_L2, both with 50% duty cycle when the division
// is even, generated from one counter so that every rising edge of clk_l2
// coincides with a rising edge of clk_l1. Both clocks start low after reset
// and rise DIV_L1/2 system clocks later. DIV_L1 must be at least 2.
//
// Ports: i_clk (system clock), i_rst_n (async), o_clk_l1, o_clk_l2.
// Use: on an FPGA these outputs would drive global clock buffers, or be
// replaced by a PLL.
module clock_divider #(
  parameter int unsigned DIV_L1   = 20,
  parameter int unsigned RATIO_L2 = 2
) (
  input  logic i_clk,
  input  logic i_rst_n,
  output logic o_clk_l1,
  output logic o_clk_l2
);

  localparam int unsigned C1W = $clog2(DIV_L1 + 1);
  localparam int unsigned C2W = $clog2(RATIO_L2 + 1);

  logic [C1W-1:0] r_c1, w_c1_next;
  logic [C2W-1:0] r_n;
  logic           w_rise1;

  assign w_c1_next = (r_c1 == C1W'(DIV_L1 - 1)) ? '0 : r_c1 + 1'b1;
  assign w_rise1   = (w_c1_next == C1W'(DIV_L1 / 2));

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_c1     <= '0;
      r_n      <= '0;
      o_clk_l1 <= 1'b0;
      o_clk_l2 <= 1'b0;
    end else begin
      r_c1     <= w_c1_next;
      o_clk_l1 <= (w_c1_next >= C1W'(DIV_L1 / 2));
      if (RATIO_L2 == 1) begin
        o_clk_l2 <= (w_c1_next >= C1W'(DIV_L1 / 2));
      end else if (w_rise1) begin
        // The n-th rising edge of clk_l1 (n counted modulo RATIO_L2) sets
        // clk_l2 high for n < RATIO_L2/2 and low otherwise.
        o_clk_l2 <= (r_n < C2W'(RATIO_L2 / 2));
        r_n      <= (r_n == C2W'(RATIO_L2 - 1)) ? '0 : r_n + 1'b1;
      end
    end
  end

endmodule
