// amp_pkg: types and constants shared by the AMP-M signal-restoration datapath.
//
// All audio samples, residual values and signal-estimate coefficients are 16-bit
// two's-complement numbers read as Q1.15 fractions, following the 16-bit input
// variables of the architecture. The threshold gain lambda is an unsigned Q4.4 number
// and the DCT dictionary entries are Q1.15 values of the cosine with the orthonormal
// scale factor applied afterwards as a power-of-two shift (a choice of this design).
package amp_pkg;

  localparam int unsigned DATA_W      = 16;   // sample / residual / estimate width
  localparam int unsigned COEF_W      = 16;   // DCT coefficient width (Q1.15)
  localparam int unsigned LAMBDA_W    = 8;    // threshold gain width
  localparam int unsigned LAMBDA_FRAC = 4;    // fractional bits of lambda (Q4.4)

  typedef logic signed [DATA_W-1:0]  data_t;
  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef logic        [LAMBDA_W-1:0] lambda_t;

  localparam data_t DATA_MAX = data_t'(2**(DATA_W-1) - 1);
  localparam data_t DATA_MIN = data_t'(-(2**(DATA_W-1)));

  // Saturate a wide signed value to the 16-bit data range.
  function automatic data_t sat_data(input logic signed [47:0] v);
    if (v > 48'(signed'(DATA_MAX)))      return DATA_MAX;
    else if (v < 48'(signed'(DATA_MIN))) return DATA_MIN;
    else                                  return data_t'(v);
  endfunction

endpackage
