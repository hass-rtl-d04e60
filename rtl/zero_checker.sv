// zero_checker: detects a pair that needs no multiplication.
//
// After clipping, a pair whose activation or weight is zero contributes nothing to the
// dot product. The zero checker raises zero_flag for such a pair (it goes straight to
// the SPE counter) and nz_valid for a pair the round-robin arbiter must dispatch to a
// MAC. Exactly one of the two outputs is high. Combinational, no latency.
module zero_checker
  import hass_pkg::*;
(
  input  data_t act_i,
  input  data_t wgt_i,
  output logic  zero_flag,
  output logic  nz_valid
);
  always_comb begin
    zero_flag = (act_i == '0) || (wgt_i == '0);
    nz_valid  = !zero_flag;
  end
endmodule
