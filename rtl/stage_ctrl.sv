// stage_ctrl: control of one stage of the modified micropipeline.
//
// A classic micropipeline stage is one C-element that joins the request
// from the previous stage with the inverted acknowledge of the next stage.
// Left alone, a token entering such a pipeline runs through every stage.
// The modified stage adds a second C-element that joins that "token" with
// the global request req_global_i (the filter's input request): the stage
// output can rise only while the global request is high and fall only
// while it is low, so each stage fires once per input sample and the
// token waits at the first C-element until the global request allows it.
//
//   token_o = C(req_i, ~ack_next_i)        first C-element
//   fire_o  = C(token_o, req_global_i)     added C-element
//
// fire_o clocks the stage's tap register, is the acknowledge sent back to
// the previous stage and, through a delay element, the request sent on to
// the next stage.
//
// The first stage (FIRST = 1) is drawn with a single C-element whose
// request is the global request itself; a second C-element with the same
// input again would change nothing, so it is left out there.
//
// Timing: no clock. With all inputs settled, fire_o rises after req_i and
// req_global_i are high and ack_next_i is low, and falls after req_i and
// req_global_i are low and ack_next_i is high (the four steps of the
// modified four-phase protocol). Reset drives both C-elements low.
// In the first stage req_global_i is the same net as req_i and is unused.
// Chained in the top level, each stage reads the next stage's output, so
// lint reports circular combinational logic through fire_o: that loop is
// the asynchronous handshake and is intended.
`timescale 1ns / 1ps
module stage_ctrl #(
    parameter bit FIRST = 1'b0
) (
    input  logic rst_ni,
    input  logic req_global_i,  // global request (Req in)
    input  logic req_i,         // delayed request of the previous stage
    input  logic ack_next_i,    // fire_o of the next stage, or Ack in
    output logic token_o,       // first C-element
    output logic fire_o         // stage request / acknowledge / DFF clock
);

  logic ack_next_n;
  assign ack_next_n = ~ack_next_i;

  c_element u_token (
      .rst_ni(rst_ni),
      .a_i   (req_i),
      .b_i   (ack_next_n),
      .c_o   (token_o)
  );

  if (FIRST) begin : g_first
    assign fire_o = token_o;
  end else begin : g_gate
    c_element u_gate (
        .rst_ni(rst_ni),
        .a_i   (token_o),
        .b_i   (req_global_i),
        .c_o   (fire_o)
    );
  end

endmodule
