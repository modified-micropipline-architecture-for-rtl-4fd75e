// async_fir_tb: end-to-end test of the asynchronous FIR filter at its
// default size (33 taps, 12-bit samples).
//
// A sampling-unit model sends NSAMP samples through the four-phase input
// channel: a synthetic ECG-like waveform (periodic QRS-shaped spikes on a
// slow baseline) with a 50 Hz mains component and random noise, sampled at
// 125 Hz, preceded by full-scale extremes and followed by a pure 50 Hz tone
// and a pure 10 Hz tone.
// A receiver model acknowledges each output after a random delay that is
// sometimes shorter and sometimes longer than the sender's request pulse.
// Every output word is compared with a reference direct-form FIR computed
// here from the sample history. The test also checks the protocol of both
// channels and counts the mechanisms of the modified micropipeline:
//   - shifts:      one firing of every stage per sample;
//   - late_ack:    req_o held high after req_i fell, waiting for ack_i;
//   - early_ack:   ack_i arrived while req_i was still high, and req_o was
//                  held high by the global request until req_i fell;
//   - hum removal: the 50 Hz tone comes out at least 60 dB down;
//   - pass band:   a 10 Hz tone keeps its amplitude within 1 dB.
`timescale 1ns / 1ps
module async_fir_tb;
  import fir_pkg::*;

  localparam int NSAMP   = 10000;  // length of the ECG record
  localparam int NTONE   = 200;    // samples of each test tone appended
  localparam int NTOTAL  = 8 + NSAMP + 2 * NTONE;
  localparam real PI     = 3.14159265358979;

  logic    rst_ni;
  logic    req_i, ack_o, req_o, ack_i;
  sample_t data_i;
  acc_t    data_o;

  int checks = 0, failures = 0;
  int shifts = 0, late_ack = 0, early_ack = 0;
  int hum_ok = 0, pass_ok = 0;

  async_fir dut (
      .rst_ni(rst_ni),
      .req_i (req_i),
      .ack_o (ack_o),
      .data_i(data_i),
      .req_o (req_o),
      .ack_i (ack_i),
      .data_o(data_o)
  );

  // Contents of the tap registers, gathered for the history check.
  sample_t regs[TAPS];
  for (genvar g = 0; g < TAPS; g++) begin : g_peek
    assign regs[g] = dut.g_stage[g].u_reg.q_o;
  end

  // Reference model -------------------------------------------------------
  sample_t hist[TAPS];
  longint  expected;

  function automatic longint ref_fir();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++) acc += longint'(hist[k]) * longint'(COEFFS[k]);
    return acc;
  endfunction

  function automatic sample_t stimulus(int n);
    real t, v;
    int  ph, r;
    if (n < 8) begin
      // extremes first: full-scale positive and negative steps
      case (n % 4)
        0: return sample_t'(2047);
        1: return sample_t'(-2048);
        2: return sample_t'(-2048);
        default: return sample_t'(2047);
      endcase
    end
    n -= 8;
    if (n >= NSAMP + NTONE) begin
      // 10 Hz pass-band tone at 125 Hz sampling
      return sample_t'($rtoi(1500.0 * $sin(2.0 * PI * 10.0 * real'(n) / 125.0)));
    end
    if (n >= NSAMP) begin
      // 50 Hz stop-band tone (mains hum)
      return sample_t'($rtoi(1500.0 * $sin(2.0 * PI * 50.0 * real'(n) / 125.0)));
    end
    t  = real'(n) / 125.0;
    ph = n % 100;                 // one beat every 0.8 s
    v  = 300.0 * $sin(2.0 * PI * 0.3 * t);
    if (ph == 40) v += 900.0;
    if (ph == 41) v += 1300.0;
    if (ph == 42) v -= 400.0;
    if (ph >= 55 && ph < 70) v += 250.0 * $sin(PI * real'(ph - 55) / 15.0);
    v += 200.0 * $sin(2.0 * PI * 50.0 * t);
    r = int'($urandom_range(0, 120)) - 60;
    v += real'(r);
    return sample_t'($rtoi(v));
  endfunction

  // Receiver --------------------------------------------------------------
  int  n_out = 0;
  real tone_peak_out = 0.0, pass_peak_out = 0.0, mag;

  initial begin
    ack_i = 1'b0;
    forever begin
      @(posedge req_o);
      #1;
      checks++;
      if (longint'(data_o) !== expected) begin
        failures++;
        if (failures < 10)
          $display("mismatch at output %0d: got %0d expected %0d", n_out, data_o, expected);
      end
      // every stage fired once for this sample: all registers hold the history
      checks++;
      for (int k = 0; k < TAPS; k++) begin
        if (regs[k] !== hist[k]) begin
          failures++;
          $display("register %0d holds %0d, expected %0d", k, regs[k], hist[k]);
          break;
        end
      end
      mag = real'(data_o) / 32768.0;
      if (mag < 0.0) mag = -mag;
      if (n_out >= 8 + NSAMP + TAPS && n_out < 8 + NSAMP + NTONE) begin
        if (mag > tone_peak_out) tone_peak_out = mag;
      end
      if (n_out >= 8 + NSAMP + NTONE + TAPS) begin
        if (mag > pass_peak_out) pass_peak_out = mag;
      end
      n_out++;
      #($urandom_range(1, 12));
      ack_i = 1'b1;
      @(negedge req_o);
      #($urandom_range(1, 4));
      ack_i = 1'b0;
    end
  end

  // Sender (sampling unit) -------------------------------------------------
  int hold;
  time t_req;
  initial begin
    rst_ni = 1'b0;
    req_i  = 1'b0;
    data_i = '0;
    for (int k = 0; k < TAPS; k++) hist[k] = '0;
    expected = 0;
    #5 rst_ni = 1'b1;
    #5;
    for (int n = 0; n < NTOTAL; n++) begin
      data_i = stimulus(n);
      for (int k = TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0]  = data_i;
      expected = ref_fir();
      #2;
      req_i = 1'b1;
      t_req = $time;
      wait (ack_o);
      // acknowledge and the completed shift both follow the request at once
      checks++;
      if ($time != t_req) begin
        failures++;
        $display("ack_o took %0t", $time - t_req);
      end
      shifts++;
      hold = int'($urandom_range(1, 12));
      #(hold);
      checks++;
      if (!req_o) begin
        failures++;
        $display("req_o not high while req_i high at sample %0d", n);
      end
      if (ack_i) begin
        early_ack++;  // receiver answered first; req_o must wait for req_i
      end
      req_i = 1'b0;
      #0.5;
      if (!ack_i) begin
        checks++;
        if (!req_o) begin
          failures++;
          $display("req_o fell before ack_i at sample %0d", n);
        end else begin
          late_ack++;
        end
      end else begin
        checks++;
        if (req_o) begin
          failures++;
          $display("req_o stayed high after req_i and ack_i at sample %0d", n);
        end
      end
      wait (!ack_o);
      wait (!req_o && !ack_i);
      #1;
    end
    #5;
    // hum rejection: 1500-count 50 Hz tone must come out below 1500 * 10^-3
    checks++;
    if (tone_peak_out < 1.5) hum_ok++;
    else begin
      failures++;
      $display("50 Hz tone not removed: peak %f", tone_peak_out);
    end
    // pass band: the 1500-count 10 Hz tone within the 1 dB ripple
    checks++;
    if (pass_peak_out > 1500.0 * 0.891 && pass_peak_out < 1500.0 * 1.122) pass_ok++;
    else begin
      failures++;
      $display("10 Hz tone gain out of the pass-band ripple: peak %f", pass_peak_out);
    end
    checks++;
    if (n_out != NTOTAL) begin
      failures++;
      $display("outputs %0d, expected %0d", n_out, NTOTAL);
    end
    $display("mechanisms: shifts=%0d late_ack=%0d early_ack=%0d hum_removed=%0d pass_band=%0d",
             shifts, late_ack, early_ack, hum_ok, pass_ok);
    $display("50 Hz tone peak out %f, 10 Hz tone peak out %f (input peak 1500)", tone_peak_out,
             pass_peak_out);
    checks++;
    if (shifts == 0 || late_ack == 0 || early_ack == 0 || hum_ok == 0 || pass_ok == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog
  initial begin
    #(2_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
