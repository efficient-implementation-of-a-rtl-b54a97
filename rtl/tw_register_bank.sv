// tw_register_bank: the weight and threshold registers of one layer, with
// the update arithmetic of the ODESA learning rules.
//
// Every neuron j has N_SYN weights w[j][i] (W_W bits, unsigned) and a
// threshold T[j] (POT_W bits, unsigned). Each clock the training logic gives
// every neuron an action (odesa_pkg::action_e):
//   ACT_REWARD : w <- w + step(TS - w)   for every synapse,
//                T <- T + step(LV - T)
//   ACT_NEGW   : w <- w - step(TS - w)   (the reverse of the weight reward)
//   ACT_PUNISH : T <- T - Delta_T        (fixed, or adaptive with the size of T)
//   ACT_NONE   : hold
// step() is odesa_pkg::step_toward: a shift by 2^-eta with a minimum step of
// one (UPD_SHIFT) or a fixed step eta in the direction of the target
// (UPD_SIGN). Results are clamped to the register range, so weights and
// thresholds never wrap. TS is the time-surface snapshot and LV the
// LAST_VALUE of that neuron, both taken when it last won.
//
// Reset values: weights from odesa_pkg::init_weight (a fixed hash, this
// design's choice; the paper does not give them), limited to the range of a
// single trace, 0 .. 2^(TS_W-1)-1, the values the weights learn towards;
// thresholds start at T_INIT.
// The registers drive the layer's neurons directly.
module tw_register_bank
  import odesa_pkg::*;
#(
  parameter int unsigned N_NEUR  = 2,
  parameter int unsigned N_SYN   = 8,
  parameter int unsigned TS_W    = 7,
  parameter int unsigned W_W     = 8,
  parameter int unsigned POT_W   = 21,
  parameter upd_mode_e   W_MODE  = UPD_SHIFT,
  parameter int unsigned W_ETA   = 3,
  parameter upd_mode_e   T_MODE  = UPD_SHIFT,
  parameter int unsigned T_ETA   = 3,
  parameter dt_mode_e    DT_MODE = DT_FIXED,
  parameter int unsigned DELTA_T = 63,
  parameter int unsigned SEED    = 1,
  parameter int unsigned T_INIT  = 0
) (
  input  logic                                   i_clk,
  input  logic                                   i_rst_n,
  input  action_e [N_NEUR-1:0]                   i_act,
  input  logic [N_NEUR-1:0][N_SYN-1:0][TS_W-1:0] i_ts,
  input  logic [N_NEUR-1:0][POT_W-1:0]           i_lv,
  output logic [N_NEUR-1:0][N_SYN-1:0][W_W-1:0]  o_weight,
  output logic [N_NEUR-1:0][POT_W-1:0]           o_threshold
);

  localparam int WMAX = (1 << W_W) - 1;
  localparam int TMAX = (1 << POT_W) - 1;

  for (genvar j = 0; j < N_NEUR; j++) begin : g_neuron
    for (genvar i = 0; i < N_SYN; i++) begin : g_w
      always_ff @(posedge i_clk or negedge i_rst_n) begin
        if (!i_rst_n) begin
          o_weight[j][i] <= W_W'(init_weight(SEED, j, i, TS_W - 1));
        end else begin
          case (i_act[j])
            ACT_REWARD: o_weight[j][i] <= W_W'(clamp(int'(o_weight[j][i]) +
                          step_toward(int'(i_ts[j][i]), int'(o_weight[j][i]), W_MODE, W_ETA), WMAX));
            ACT_NEGW:   o_weight[j][i] <= W_W'(clamp(int'(o_weight[j][i]) -
                          step_toward(int'(i_ts[j][i]), int'(o_weight[j][i]), W_MODE, W_ETA), WMAX));
            default:    ;
          endcase
        end
      end
    end

    always_ff @(posedge i_clk or negedge i_rst_n) begin
      if (!i_rst_n) begin
        o_threshold[j] <= POT_W'(T_INIT);
      end else begin
        case (i_act[j])
          ACT_REWARD: o_threshold[j] <= POT_W'(clamp(int'(o_threshold[j]) +
                        step_toward(int'(i_lv[j]), int'(o_threshold[j]), T_MODE, T_ETA), TMAX));
          ACT_PUNISH: o_threshold[j] <= POT_W'(clamp(int'(o_threshold[j]) -
                        ((DT_MODE == DT_ADAPTIVE) ? adaptive_delta(int'(o_threshold[j]))
                                                  : int'(DELTA_T)), TMAX));
          default:    ;
        endcase
      end
    end
  end

endmodule
