// event_source: replays the training RAM into the network, or passes the
// external input events through.
//
// While i_use_ram is high and fewer than i_epochs epochs have been played
// (i_epochs = 0: no limit), the sequencer steps the RAM address by one per
// clock (the input layer's clock) from 0 to i_len-1 and wraps, counting
// epochs. The RAM word (registered read, one clock late) is split into
// events and label; the multiplexer of the paper's network figure then
// selects the RAM events or the external i_events. The label goes out only
// in RAM mode, and GAS is the OR of its bits. o_done rises when the epoch
// limit has been reached.
//
// The RAM itself (training_ram) is instantiated here so that the read port
// and the sequencer share the clock.
module event_source #(
  parameter int unsigned N_IN   = 8,
  parameter int unsigned N_CLS  = 4,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned ADDR_W = $clog2(DEPTH),
  parameter int unsigned EP_W   = 16
) (
  input  logic                    i_clk,
  input  logic                    i_rst_n,
  input  logic                    i_use_ram,
  input  logic [ADDR_W:0]         i_len,
  input  logic [EP_W-1:0]         i_epochs,
  input  logic [N_IN-1:0]         i_events,
  input  logic                    i_wr_clk,
  input  logic                    i_wr_en,
  input  logic [ADDR_W-1:0]       i_wr_addr,
  input  logic [N_IN+N_CLS-1:0]   i_wr_data,
  output logic [N_IN-1:0]         o_events,
  output logic [N_CLS-1:0]        o_label,
  output logic                    o_gas,
  output logic [EP_W-1:0]         o_epoch,
  output logic                    o_done
);

  logic [ADDR_W-1:0]       r_addr;
  logic                    r_run, r_valid;
  logic [N_IN+N_CLS-1:0]   w_word;

  assign o_done = (i_epochs != '0) && (o_epoch >= i_epochs);
  assign r_run  = i_use_ram && !o_done && (i_len != '0);

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      r_addr  <= '0;
      o_epoch <= '0;
      r_valid <= 1'b0;
    end else begin
      r_valid <= r_run;
      if (r_run) begin
        if ({1'b0, r_addr} == i_len - 1'b1) begin
          r_addr  <= '0;
          o_epoch <= o_epoch + 1'b1;
        end else begin
          r_addr <= r_addr + 1'b1;
        end
      end
    end
  end

  training_ram #(
    .DATA_W (N_IN + N_CLS),
    .DEPTH  (DEPTH),
    .ADDR_W (ADDR_W)
  ) u_ram (
    .i_wr_clk  (i_wr_clk),
    .i_wr_en   (i_wr_en),
    .i_wr_addr (i_wr_addr),
    .i_wr_data (i_wr_data),
    .i_rd_clk  (i_clk),
    .i_rd_addr (r_addr),
    .o_rd_data (w_word)
  );

  always_comb begin
    if (i_use_ram) begin
      o_events = r_valid ? w_word[N_IN-1:0] : '0;
      o_label  = r_valid ? w_word[N_IN +: N_CLS] : '0;
    end else begin
      o_events = i_events;
      o_label  = '0;
    end
  end

  assign o_gas = |o_label;

endmodule
