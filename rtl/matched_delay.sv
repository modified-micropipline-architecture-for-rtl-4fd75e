// matched_delay: behavioural model of the request delay element drawn
// between two micropipeline stages.
//
// This is a behavioural model, not synthesizable logic: a delay line is a
// physical part (a chain of buffers or look-up tables placed and kept by
// the implementation tools), and synthesis drops the delay value written
// here. The model passes its input to its output after DELAY time units
// (1 ns) through a delayed continuous assignment, which also swallows
// pulses shorter than DELAY like a real slow gate would.
//
// Interface: a_i input request; y_o delayed request.
// Timing: y_o follows a_i after DELAY ns.
//
// The paper names the element but gives no delay value. The default of 0
// is this design's choice and is needed for correct data: every tap
// register is clocked by its own stage's request, and the register of the
// next stage must sample the old content of this one, so the delay of the
// request from one stage to the next has to stay below the register's
// clock-to-output time (see the README). A positive DELAY is used only to
// observe the handshake in isolation.
`timescale 1ns / 1ps
module matched_delay #(
    parameter int unsigned DELAY = 0
) (
    input  logic a_i,
    output logic y_o
);

  // A zero delay is a plain connection, so that the whole request wave of
  // a sample settles within one simulation time step.
  if (DELAY == 0) begin : g_wire
    assign y_o = a_i;
  end else begin : g_delay
    assign #(DELAY) y_o = a_i;
  end

endmodule
