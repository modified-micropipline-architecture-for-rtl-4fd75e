// async_fir: sample-driven asynchronous FIR filter built on a modified
// micropipeline (top level).
//
// There is no clock. A sampling front end places a sample on data_i and
// raises req_i, the global request. The request enters a chain of TAPS
// stage controllers (stage_ctrl); each stage output ("fire") clocks that
// stage's edge-triggered tap register, acknowledges the previous stage and
// is passed through a delay element as the request of the next stage. The
// added C-element in each stage joins the token with the global request, so
// that every stage fires exactly once per sample. Register 0 loads the new
// sample and register k loads the old content of register k-1: the chain
// of registers is the filter's delay line and shifts by one sample per
// request. The multipliers and the adder chain (fir_mac) form the output.
//
// Handshakes (four-phase, bundled data, active high):
//   input  side: data_i stable before req_i rises; ack_o (= first stage)
//                rises once the sample is taken; req_i falls; ack_o falls.
//   output side: req_o (= last stage) rises when all registers hold the new
//                history and data_o = y[n]; the receiver raises ack_i; the
//                filter lowers req_o after req_i has fallen; the receiver
//                lowers ack_i. data_o stays valid until the next req_i.
// The sender must not raise req_i again before the output handshake of the
// previous sample is complete (req_o and ack_i low); otherwise stages would
// fire on different samples. An assertion checks this rule. For a filter
// fed at an audio or biomedical sampling rate it always holds.
//
// Departures from the paper's drawing, both this design's choices: the
// first coefficient reads the first register (which holds the new sample
// once the request has passed it) rather than the input wire, and there is
// one register per coefficient (33, not 32), so that data_o is a complete
// y[n] while req_o is high and does not depend on data_i. Correct shifting
// needs the request delay from one stage to the next to be shorter than a
// register's clock-to-output time (hold condition), hence DELAY = 0.
//
// Lint and synthesis report a combinational loop through the stage
// controllers: each stage reads the next stage's output as its acknowledge
// and the C-elements hold state through feedback. That loop is the
// asynchronous control itself and is intended.
`timescale 1ns / 1ps
module async_fir
  import fir_pkg::*;
#(
    parameter int unsigned DELAY = 0  // request delay between stages, ns
) (
    input  logic    rst_ni,
    // input channel (from the sampling unit)
    input  logic    req_i,
    output logic    ack_o,
    input  sample_t data_i,
    // output channel (to the consumer of the filtered signal)
    output logic    req_o,
    input  logic    ack_i,
    output acc_t    data_o
);

  logic    [TAPS-1:0] fire;     // stage outputs
  logic    [TAPS-2:0] req_dly;  // delayed stage outputs
  sample_t            taps[TAPS];

  for (genvar s = 0; s < TAPS; s++) begin : g_stage
    logic    req_in_s;
    logic    ack_next_s;
    sample_t d_s;

    if (s == 0) begin : g_head
      assign req_in_s = req_i;
      assign d_s      = data_i;
    end else begin : g_body
      assign req_in_s = req_dly[s-1];
      assign d_s      = taps[s-1];
    end

    if (s == TAPS - 1) begin : g_tail
      assign ack_next_s = ack_i;
    end else begin : g_next
      assign ack_next_s = fire[s+1];
    end

    stage_ctrl #(
        .FIRST(s == 0)
    ) u_ctrl (
        .rst_ni      (rst_ni),
        .req_global_i(req_i),
        .req_i       (req_in_s),
        .ack_next_i  (ack_next_s),
        .token_o     (),
        .fire_o      (fire[s])
    );

    // The last stage drives req_o directly; the others feed a delay.
    if (s < TAPS - 1) begin : g_dly
      matched_delay #(
          .DELAY(DELAY)
      ) u_dly (
          .a_i(fire[s]),
          .y_o(req_dly[s])
      );
    end

    tap_register #(
        .WIDTH(DATA_W)
    ) u_reg (
        .clk_i (fire[s]),
        .rst_ni(rst_ni),
        .d_i   (d_s),
        .q_o   (taps[s])
    );
  end

  fir_mac #(
      .N(TAPS)
  ) u_mac (
      .taps_i(taps),
      .y_o   (data_o)
  );

  assign ack_o = fire[0];
  assign req_o = fire[TAPS-1];

  // Four-phase rules, checked at edges where the other signal cannot move
  // in the same time step: a new sample only once the receiver has
  // withdrawn its acknowledge; the filter raises req_o only towards a
  // receiver that is idle and lowers it only after the acknowledge.
  always @(posedge req_i) begin
    if (rst_ni) assert (!ack_i)
      else $error("async_fir: req_i raised while ack_i is still high");
  end

  always @(posedge req_o) begin
    if (rst_ni) assert (!ack_i)
      else $error("async_fir: req_o raised while ack_i is still high");
  end

  always @(negedge req_o) begin
    if (rst_ni) assert (ack_i)
      else $error("async_fir: req_o lowered before ack_i");
  end

endmodule
