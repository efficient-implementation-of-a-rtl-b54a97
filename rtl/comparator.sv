// comparator: the "compare / prioritise" block of an ODESA layer.
//
// Combinational. Marks, one-hot, the neuron whose output is the largest;
// of equal outputs the one with the lowest index wins, as the paper's
// winner equation states (d_{i-1} < d_i >= d_{i+1..n}). A neuron output of 0
// (below threshold) never wins, so o_trigger is all-zero when no neuron
// crossed its threshold. The spike generators behind it remove the glitches
// this combinational logic can produce.
//
// Ports: i_neuron_out[N] (POT_W bits each), o_trigger[N] (one-hot or zero).
module comparator #(
  parameter int unsigned N     = 2,
  parameter int unsigned POT_W = 21
) (
  input  logic [N-1:0][POT_W-1:0] i_neuron_out,
  output logic [N-1:0]            o_trigger
);

  logic [POT_W-1:0] w_best;

  // Scan from index 0 upwards; a strictly larger value replaces the current
  // winner, so equal values keep the lower index.
  always_comb begin
    w_best    = '0;
    o_trigger = '0;
    for (int i = 0; i < N; i++) begin
      if (i_neuron_out[i] > w_best) begin
        w_best    = i_neuron_out[i];
        o_trigger = '0;
        o_trigger[i] = 1'b1;
      end
    end
  end

endmodule
