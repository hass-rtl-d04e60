// hass_pkg: types and constants shared by the sparse dataflow accelerator.
//
// Activations and weights are 16-bit two's-complement fixed-point numbers, as the
// accelerator is evaluated with 16-bit fixed point for both. The position of the
// binary point (FRAC_W) and the accumulator width (ACC_W) are this design's own
// choices: Q8.8 data and 40-bit accumulators, which hold a 32-bit product plus eight
// guard bits, enough for 256 accumulations without overflow.
package hass_pkg;
  localparam int unsigned DATA_W = 16;
  localparam int unsigned ACC_W  = 40;
  localparam int unsigned FRAC_W = 8;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [DATA_W-1:0] thr_t;   // magnitude threshold, unsigned

  // Requantise an accumulator value to 16-bit data: arithmetic shift right by FRAC_W,
  // then saturate to the data range.
  function automatic data_t requant(input acc_t v);
    acc_t s;
    s = v >>> FRAC_W;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DATA_W-1:0]);
  endfunction
endpackage
