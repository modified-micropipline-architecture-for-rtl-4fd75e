// tap_register: edge-triggered D flip-flop register of one filter stage.
//
// Holds one past input sample. It loads d_i on the rising edge of its
// stage's request (clk_i), the output of that stage's control, and is
// cleared by the active-low asynchronous reset. Edge triggering is what
// the paper prescribes in place of the transparent latches of a classic
// micropipeline: a latch would stay open for as long as the global request
// is high and pass the newest sample through every stage.
//
// Interface: clk_i stage request; d_i sample from the previous stage;
// q_o stored sample. Timing: q_o changes only at the rising edge of clk_i.
// The reset value of zero (an empty filter history) is this design's choice.
`timescale 1ns / 1ps
module tap_register #(
    parameter int unsigned WIDTH = 12
) (
    input  logic             clk_i,
    input  logic             rst_ni,
    input  logic [WIDTH-1:0] d_i,
    output logic [WIDTH-1:0] q_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) q_o <= '0;
    else         q_o <= d_i;
  end

endmodule
