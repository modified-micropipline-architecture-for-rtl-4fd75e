// c_element: two-input Muller C-element with an active-low reset.
//
// The output copies the inputs when both are equal and keeps its value
// while they differ. It is the state-holding gate of every micropipeline
// stage. The C-element is written as a level-sensitive latch whose enable
// is (a == b) and whose data is a, the form that ordinary synthesis tools
// map onto a latch cell or an FPGA look-up table with a latch. Lint and
// synthesis therefore report an inferred latch here: that latch is the
// C-element's memory and is intended.
//
// Interface: a_i, b_i inputs; c_o output; rst_ni forces c_o low.
// Timing: purely level sensitive, no clock. c_o changes only after both
// inputs have changed to the same value.
//
// The paper uses C-elements but does not say how they are built or reset;
// the latch form and the reset are this design's choices.
`timescale 1ns / 1ps
module c_element (
    input  logic rst_ni,
    input  logic a_i,
    input  logic b_i,
    output logic c_o
);

  always_latch begin
    if (!rst_ni)         c_o = 1'b0;
    else if (a_i == b_i) c_o = a_i;
  end

endmodule
