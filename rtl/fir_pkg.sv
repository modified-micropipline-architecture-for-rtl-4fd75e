// fir_pkg: sizes and coefficients shared by the asynchronous FIR filter.
//
// The filter is the order-32 low-pass of the evaluation specification:
// sampling 125 Hz, pass band to 35 Hz with 1 dB ripple, stop band from
// 45 Hz with 80 dB attenuation. Order 32 (33 coefficients) and the 12-bit
// sample width come from that specification and from the ADC of the test
// signal. The coefficient values themselves are this design's own: an
// equiripple (Parks-McClellan) design for the band edges above, with the
// stop band weighted by (10^(1/20)-1)/(10^(1/20)+1) / 10^(-80/20), each
// coefficient h_k rounded to round(h_k * 2^15) as a signed Q1.15 number.
// After rounding the response has about +-0.45 dB pass-band ripple, at
// least 79 dB attenuation above 45 Hz and 82 dB at 50 Hz (mains hum).
// Samples are signed two's complement; the accumulator keeps full
// precision, so no rounding or saturation takes place in the filter.
`timescale 1ns / 1ps
package fir_pkg;

  localparam int unsigned ORDER  = 32;           // filter order
  localparam int unsigned TAPS   = ORDER + 1;    // coefficients h1..h33
  localparam int unsigned DATA_W = 12;           // input sample width
  localparam int unsigned COEF_W = 16;           // Q1.15 coefficients
  localparam int unsigned ACC_W  = DATA_W + COEF_W + $clog2(TAPS);

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // h1 first (applied to the newest sample). Symmetric: linear phase.
  localparam coef_t COEFFS [TAPS] = '{
      16'sd122,   16'sd478,   16'sd501,   -16'sd200,  -16'sd344,
      16'sd464,   16'sd126,   -16'sd764,  16'sd406,   16'sd830,
      -16'sd1291, -16'sd240,  16'sd2351,  -16'sd1723, -16'sd3230,
      16'sd9775,  16'sd19957, 16'sd9775,  -16'sd3230, -16'sd1723,
      16'sd2351,  -16'sd240,  -16'sd1291, 16'sd830,   16'sd406,
      -16'sd764,  16'sd126,   16'sd464,   -16'sd344,  -16'sd200,
      16'sd501,   16'sd478,   16'sd122
  };

endpackage
