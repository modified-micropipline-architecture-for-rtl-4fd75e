// fir_mac: multipliers and adder chain of the direct-form FIR filter.
//
// Each tap sample taps_i[k] is multiplied by its coefficient COEFFS[k]
// (h1 for the newest sample) and the products are summed along a chain of
// adders, as in the direct-form structure y = h1*x[n] + h2*x[n-1] + ... +
// hm*x[n-m+1]. The block is combinational; it has no handshake of its own.
// Its result is read once the last stage of the pipeline has raised its
// request, when every tap register holds its new sample.
//
// Interface: taps_i[0..TAPS-1] signed samples, newest first; y_o signed
// full-precision sum (ACC_W bits, wide enough that it never overflows).
// Timing: combinational, one multiplier plus TAPS-1 adders deep.
//
// The structure follows the paper's filter diagrams. Widths, number format
// and coefficient values are this design's (see fir_pkg).
`timescale 1ns / 1ps
module fir_mac
  import fir_pkg::*;
#(
    parameter int unsigned N = TAPS
) (
    input  sample_t taps_i[N],
    output acc_t    y_o
);

  acc_t prod[N];
  acc_t sum [N];

  always_comb begin
    for (int k = 0; k < N; k++) begin
      prod[k] = acc_t'(taps_i[k]) * acc_t'(COEFFS[k]);
    end
    sum[0] = prod[0];
    for (int k = 1; k < N; k++) begin
      sum[k] = sum[k-1] + prod[k];
    end
  end

  assign y_o = sum[N-1];

endmodule
