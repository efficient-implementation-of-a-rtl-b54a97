// tb_comparator: self-checking test of the winner-takes-all comparator.
//
// The first vectors are the neuron outputs printed in the paper's
// comparator waveform (two neurons, hexadecimal): F81/F81 -> O1 (a tie goes
// to the first neuron), F42/1EC0 -> O2, F03/000 -> O1, EC4/F81 -> O2. Then
// random vectors for a 4-input comparator are checked against a reference
// argmax written here: the trigger is one-hot on the largest non-zero
// output, lowest index on ties, and all-zero when every output is zero.
module tb_comparator;
  localparam int unsigned POT_W = 21;
  logic [1:0][POT_W-1:0] v2;
  logic [1:0]            t2;
  logic [3:0][POT_W-1:0] v4;
  logic [3:0]            t4;
  int checks = 0, failures = 0;

  comparator #(.N(2), .POT_W(POT_W)) dut2 (.i_neuron_out(v2), .o_trigger(t2));
  comparator #(.N(4), .POT_W(POT_W)) dut4 (.i_neuron_out(v4), .o_trigger(t4));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [3:0] ref_argmax(input logic [3:0][POT_W-1:0] v);
    logic [POT_W-1:0] best = '0;
    logic [3:0] r = '0;
    for (int i = 0; i < 4; i++)
      if (v[i] > best) begin
        best = v[i];
        r    = 4'b0001 << i;
      end
    return r;
  endfunction

  initial begin
    // vectors from the paper's waveform
    v2 = {21'h000F81, 21'h000F81}; #1 check(t2 == 2'b01, "F81 vs F81 -> O1");
    v2 = {21'h001EC0, 21'h000F42}; #1 check(t2 == 2'b10, "F42 vs 1EC0 -> O2");
    v2 = {21'h000000, 21'h000F03}; #1 check(t2 == 2'b01, "F03 vs 000 -> O1");
    v2 = {21'h000F81, 21'h000EC4}; #1 check(t2 == 2'b10, "EC4 vs F81 -> O2");
    v2 = '0;                       #1 check(t2 == 2'b00, "all zero -> no trigger");
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 4; i++) begin
        case ($urandom_range(0, 3))
          0: v4[i] = '0;
          1: v4[i] = POT_W'($urandom_range(0, 15));   // many ties
          default: v4[i] = POT_W'($urandom);
        endcase
      end
      #1;
      check(t4 == ref_argmax(v4), $sformatf("random argmax %h %h %h %h -> %b", v4[0], v4[1], v4[2], v4[3], t4));
      check($onehot0(t4), "trigger is one-hot or zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
