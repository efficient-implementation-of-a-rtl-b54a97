// odesa_pkg: types and arithmetic shared by the ODESA network blocks.
//
// The learning rules of the trainers are written once here as functions on
// plain 32-bit integers; the trainers clamp the results back to their
// register widths.
//   * step_toward(): the "reward" step of a register towards a target.
//       UPD_SHIFT:  x += (target - x) * 2^-eta, arithmetic shift; when the
//                   shifted difference is zero but the difference is not, the
//                   step is +/-1 so that training never locks up.
//       UPD_SIGN:   x += eta * sign(target - x)   (fixed-step variant).
//   * adaptive_delta(): the threshold punishment step that shrinks with the
//     threshold itself, so that the threshold never crosses zero.
//   * init_weight(): the reset value of every weight, a fixed hash of the
//     layer seed, neuron and synapse index. The reset values are this
//     design's own choice; they only break the symmetry between neurons.
package odesa_pkg;

  // How a reward moves a weight or a threshold.
  typedef enum logic {
    UPD_SHIFT = 1'b0,  // learning rate 2^-eta, shift and add
    UPD_SIGN  = 1'b1   // fixed step eta in the direction of the target
  } upd_mode_e;

  // How a punishment lowers a threshold.
  typedef enum logic {
    DT_FIXED    = 1'b0,  // constant Delta_T
    DT_ADAPTIVE = 1'b1   // Delta_T chosen from the threshold's magnitude
  } dt_mode_e;

  // What a trainer does to one neuron in one update cycle.
  typedef enum logic [1:0] {
    ACT_NONE   = 2'd0,
    ACT_REWARD = 2'd1,  // weights towards TS, threshold towards LV
    ACT_PUNISH = 2'd2,  // threshold lowered by Delta_T
    ACT_NEGW   = 2'd3   // weights away from TS (output layer, wrong winner)
  } action_e;

  function automatic int sgn(input int v);
    return (v > 0) ? 1 : ((v < 0) ? -1 : 0);
  endfunction

  // Signed step that moves `cur` towards `target`.
  function automatic int step_toward(input int target, input int cur,
                                     input upd_mode_e mode, input int eta);
    int diff;
    int d;
    diff = target - cur;
    if (diff == 0) return 0;
    if (mode == UPD_SHIFT) begin
      d = diff >>> eta;
      if (d == 0) d = sgn(diff);
      return d;
    end
    return sgn(diff) * eta;
  endfunction

  // Limit v to [0, maxv].
  function automatic int clamp(input int v, input int maxv);
    if (v < 0) return 0;
    if (v > maxv) return maxv;
    return v;
  endfunction

  // Threshold punishment step that depends on the threshold's size.
  function automatic int adaptive_delta(input int t);
    if (t > 65535) return 1023;
    if (t > 4095)  return 255;
    if (t > 255)   return 15;
    return 1;
  endfunction

  // Reset value of weight (neuron j, synapse i) of a layer, in [0, 2^w_w).
  function automatic int init_weight(input int seed, input int j, input int i,
                                     input int w_w);
    int h;
    h = (seed * 97 + j * 61 + i * 29 + i * j * 17 + 40) * 73;
    h = h ^ (h >>> 5);
    return h & ((1 << w_w) - 1);
  endfunction

endpackage
