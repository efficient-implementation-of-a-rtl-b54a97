// tb_event_source: self-checking test of the input sequencer (training RAM,
// address counter and input multiplexer).
//
// A short training set of 7 words ({label one-hot, input events}, one word
// per first-layer clock) is written through the write port. With RAM mode
// selected and 3 epochs requested, the outputs must replay the 7 words in
// order 3 times, the GAS output must be the OR of the label bits of each
// word, the epoch counter must count to 3 and 'done' must then stop the
// replay. Switching to external mode must pass the external events through
// with no label.
module tb_event_source;
  localparam int N_IN = 8, N_CLS = 4, DEPTH = 64, AW = 6, EP_W = 16, LEN = 7;
  logic clk = 1'b0, rst_n = 1'b1, use_ram = 1'b0, we = 1'b0;
  logic [AW:0]          len = AW'(LEN);
  logic [EP_W-1:0]      epochs = 16'd3;
  logic [N_IN-1:0]      ext = '0;
  logic [AW-1:0]        wa = '0;
  logic [N_IN+N_CLS-1:0] wd = '0;
  logic [N_IN-1:0]      ev;
  logic [N_CLS-1:0]     lab;
  logic                 gas, done;
  logic [EP_W-1:0]      epoch;
  int checks = 0, failures = 0;
  logic [N_IN+N_CLS-1:0] words [LEN];
  logic [N_IN+N_CLS-1:0] seen [$];

  event_source #(.N_IN(N_IN), .N_CLS(N_CLS), .DEPTH(DEPTH), .EP_W(EP_W)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_use_ram(use_ram), .i_len(len), .i_epochs(epochs),
    .i_events(ext), .i_wr_clk(clk), .i_wr_en(we), .i_wr_addr(wa), .i_wr_data(wd),
    .o_events(ev), .o_label(lab), .o_gas(gas), .o_epoch(epoch), .o_done(done));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (use_ram && ({lab, ev} != '0)) seen.push_back({lab, ev});
    check(gas == (|lab), "GAS is the OR of the label");
  end

  initial begin
    for (int i = 0; i < LEN; i++) begin
      words[i][N_IN-1:0]      = N_IN'(1 << (i % N_IN)) | N_IN'($urandom_range(0, 255) & 8'h11);
      words[i][N_IN +: N_CLS] = (i % 3 == 0) ? N_CLS'(1 << (i % N_CLS)) : '0;
    end
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk);
      we = 1'b1; wa = AW'(i); wd = words[i];
    end
    @(negedge clk);
    we = 1'b0;
    check(ev == '0 && lab == '0 && epoch == '0, "idle before the run");
    use_ram = 1'b1;
    repeat (3 * LEN + 10) @(negedge clk);
    check(done == 1'b1 && epoch == 16'd3, $sformatf("3 epochs then done (epoch %0d)", epoch));
    check(seen.size() == 3 * LEN, $sformatf("%0d words replayed (exp %0d)", seen.size(), 3 * LEN));
    for (int k = 0; k < seen.size() && k < 3 * LEN; k++)
      check(seen[k] == words[k % LEN], $sformatf("word %0d in order", k));
    check(ev == '0 && lab == '0, "silent after done");
    // external mode
    use_ram = 1'b0;
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      ext = N_IN'($urandom);
      #1 check(ev == ext && lab == '0, "external events pass with no label");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
