// tb_leaky_accumulator: self-checking test of the synapse trace counter.
//
// Checks, against a cycle-by-cycle reference model written here:
//  - a single event loads C and the trace then falls by one per clock,
//    reaching 0 exactly C clocks after the load (linear decay, C = 63 as in
//    the paper's 8__2_4__4 network);
//  - a second event while the trace is still above 0 adds C to what is left
//    (the "two close spikes" case), saturating at 2^(CNT_W+1)-1;
//  - the active-low clear pulse o_clr comes exactly 2 clocks after the load
//    and lasts one clock;
//  - random event trains match the model on every clock;
//  - a second instance with exponential decay halves the trace each clock.
module tb_leaky_accumulator;
  localparam int unsigned CNT_W = 6;
  localparam int unsigned C     = 63;

  logic clk = 1'b0, rst_n = 1'b1, ev = 1'b0;
  logic [CNT_W:0] ln, ln_exp;
  logic           clr, clr_exp;
  int checks = 0, failures = 0;

  leaky_accumulator #(.CNT_W(CNT_W), .C(C)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_event(ev), .o_ln(ln), .o_clr(clr));
  leaky_accumulator #(.CNT_W(CNT_W), .C(C), .EXP_DECAY(1'b1)) dut_exp (
    .i_clk(clk), .i_rst_n(rst_n), .i_event(ev), .o_ln(ln_exp), .o_clr(clr_exp));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  // reference model
  int  m_ln = 0, m_exp = 0, m_since = 99;
  bit  m_evd = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ev && !m_evd) begin
        m_ln    = (m_ln + C > 127) ? 127 : m_ln + C;
        m_exp   = (m_exp + C > 127) ? 127 : m_exp + C;
        m_since = 0;
      end else begin
        if (m_ln  > 0) m_ln  = m_ln - 1;
        m_exp   = m_exp / 2;
        m_since = m_since + 1;
      end
      m_evd = ev;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-clock comparison with the model (sampled after the edge)
  bit compare = 0;
  always @(posedge clk) begin
    #1;
    if (compare) begin
      check(ln == 7'(m_ln), "trace equals model");
      check(ln_exp == 7'(m_exp), "exponential trace equals model");
      check(clr == !(m_since == 2), "o_clr low exactly 2 clocks after load");
    end
  end

  task automatic pulse_event(input int len);
    @(negedge clk) ev = 1'b1;
    repeat (len) @(negedge clk);
    ev = 1'b0;
  endtask

  initial begin
    int t0, t_zero;
    #2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(ln == '0 && clr == 1'b1, "reset state");
    compare = 1;
    // single event: C then linear decay to 0 in C clocks
    pulse_event(3);
    @(posedge clk); #2;
    t0 = 0;
    while (ln != 0 && t0 < 200) begin
      @(posedge clk); #2;
      t0++;
    end
    check(t0 == C - 3, $sformatf("linear trace reached 0 after %0d clocks from load (exp %0d)", t0 + 3, C));
    repeat (5) @(posedge clk);
    // two events 10 clocks apart: second adds C to the remaining trace
    pulse_event(2);
    repeat (8) @(posedge clk);
    pulse_event(2);
    @(posedge clk); #2;
    check(int'(ln) > int'(C), "second close event lifts trace above C");
    // three quick events: saturation
    pulse_event(1);
    @(negedge clk);
    pulse_event(1);
    @(posedge clk); #2;
    check(ln == 7'd127 || int'(ln) >= 120, "trace saturates near the top");
    repeat (200) @(posedge clk);
    check(ln == '0 && ln_exp == '0, "both traces decayed to 0");
    // random event trains
    for (int n = 0; n < 60; n++) begin
      pulse_event($urandom_range(1, 3));
      repeat ($urandom_range(0, 70)) @(negedge clk);
    end
    compare = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
