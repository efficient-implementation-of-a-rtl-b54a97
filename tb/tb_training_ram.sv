// tb_training_ram: self-checking test of the training-data RAM.
//
// The RAM has a write port on one clock and a registered read port on
// another, as when the host loads the samples with the system clock and the
// first layer's clock reads them. Random words are written to random
// addresses and mirrored in a model; reads on the other clock must return
// the model's word one read-clock edge after the address is applied.
module tb_training_ram;
  localparam int DW = 12, DEPTH = 2048, AW = 11;
  logic wclk = 1'b0, rclk = 1'b0, we = 1'b0;
  logic [AW-1:0] wa = '0, ra = '0;
  logic [DW-1:0] wd = '0, rd;
  int checks = 0, failures = 0;
  logic [DW-1:0] model [int];

  training_ram #(.DATA_W(DW), .DEPTH(DEPTH)) dut (
    .i_wr_clk(wclk), .i_wr_en(we), .i_wr_addr(wa), .i_wr_data(wd),
    .i_rd_clk(rclk), .i_rd_addr(ra), .o_rd_data(rd));

  always #5  wclk = ~wclk;
  always #17 rclk = ~rclk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // write every location once, then random overwrites
    for (int a = 0; a < DEPTH + 500; a++) begin
      @(negedge wclk);
      we = 1'b1;
      wa = (a < DEPTH) ? AW'(a) : AW'($urandom);
      wd = DW'($urandom);
      model[int'(wa)] = wd;
      // occasionally a cycle with write enable low must not write
      if ($urandom_range(0, 9) == 0) begin
        @(negedge wclk);
        we = 1'b0;
        wd = ~wd;
      end
    end
    @(negedge wclk);
    we = 1'b0;
    for (int n = 0; n < 600; n++) begin
      @(negedge rclk);
      ra = AW'($urandom);
      @(posedge rclk); #1;
      check(rd == model[int'(ra)], $sformatf("read %0d: %h exp %h", ra, rd, model[int'(ra)]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
