// training_ram: on-chip memory holding the training (or test) set.
//
// One word per time step of the input layer's clock: the low N_IN bits are
// the input spikes of that step, the high N_CLS bits the one-hot label (all
// zero when the step carries no label). A simple dual-port RAM: the host
// writes through port A on its own clock, the event source reads through
// port B, one registered read per layer-1 clock. Word format and depth are
// this design's choice; the paper only says the set is kept in the FPGA's
// internal RAM and replayed.
//
// The array is not reset; a read returns what was last written.
module training_ram #(
  parameter int unsigned DATA_W = 12,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              i_wr_clk,
  input  logic              i_wr_en,
  input  logic [ADDR_W-1:0] i_wr_addr,
  input  logic [DATA_W-1:0] i_wr_data,
  input  logic              i_rd_clk,
  input  logic [ADDR_W-1:0] i_rd_addr,
  output logic [DATA_W-1:0] o_rd_data
);

  logic [DATA_W-1:0] r_mem [DEPTH];

  always_ff @(posedge i_wr_clk) begin
    if (i_wr_en) r_mem[i_wr_addr] <= i_wr_data;
  end

  always_ff @(posedge i_rd_clk) begin
    o_rd_data <= r_mem[i_rd_addr];
  end

endmodule
