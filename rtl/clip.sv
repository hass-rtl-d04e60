// clip: magnitude-based pruning of one activation/weight pair.
//
// Each SPE lane passes its activation and its weight through a clip before the zero
// check. A value whose magnitude is strictly below its threshold is replaced by zero;
// any other value passes unchanged. The activation and the weight have separate
// thresholds (tau_a, tau_w), one pair per layer, set at run time; this follows the
// per-layer tau_w/tau_a thresholds of the pruning algorithm. The magnitude is taken in
// DATA_W+1 bits so that the most negative value is handled. The strict "<" is this
// design's reading of "below the threshold". Purely combinational, no latency.
module clip
  import hass_pkg::*;
(
  input  data_t act_i,
  input  data_t wgt_i,
  input  thr_t  tau_a,
  input  thr_t  tau_w,
  output data_t act_o,
  output data_t wgt_o
);
  function automatic logic [DATA_W:0] mag(input data_t v);
    logic signed [DATA_W:0] e;
    e = {v[DATA_W-1], v};
    return (e < 0) ? unsigned'(-e) : unsigned'(e);
  endfunction

  always_comb begin
    act_o = (mag(act_i) < {1'b0, tau_a}) ? data_t'(0) : act_i;
    wgt_o = (mag(wgt_i) < {1'b0, tau_w}) ? data_t'(0) : wgt_i;
  end
endmodule
