// fir_mac_tb: self-checking test of the multiplier and adder chain.
//
// Applies impulses at every tap (each output must equal that tap's
// coefficient times the sample), all-extreme inputs (largest positive and
// negative sums) and random tap vectors, and compares the result with a sum
// of products computed here in 64-bit arithmetic.
`timescale 1ns / 1ps
module fir_mac_tb;
  import fir_pkg::*;

  sample_t taps[TAPS];
  acc_t    y;
  int checks = 0, failures = 0;

  fir_mac dut (
      .taps_i(taps),
      .y_o   (y)
  );

  function automatic longint ref_sum();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++) acc += longint'(taps[k]) * longint'(COEFFS[k]);
    return acc;
  endfunction

  task automatic check(string what);
    longint e;
    #1;
    e = ref_sum();
    checks++;
    if (longint'(y) !== e) begin
      failures++;
      if (failures < 10) $display("%s: y=%0d expected %0d", what, y, e);
    end
  endtask

  initial begin
    // impulses of both signs at every tap
    for (int k = 0; k < TAPS; k++) begin
      foreach (taps[j]) taps[j] = '0;
      taps[k] = sample_t'(1);
      check("unit impulse");
      taps[k] = sample_t'(-2048);
      check("negative full-scale impulse");
    end
    // extremes: sign pattern that maximises and minimises the sum
    foreach (taps[j]) taps[j] = (COEFFS[j] >= 0) ? sample_t'(2047) : sample_t'(-2048);
    check("largest sum");
    foreach (taps[j]) taps[j] = (COEFFS[j] >= 0) ? sample_t'(-2048) : sample_t'(2047);
    check("smallest sum");
    // random vectors
    for (int i = 0; i < 2000; i++) begin
      foreach (taps[j]) taps[j] = sample_t'($urandom);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
