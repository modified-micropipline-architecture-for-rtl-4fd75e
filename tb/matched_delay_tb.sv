// matched_delay_tb: self-checking test of the request delay model.
//
// Runs the model with a 5 ns delay and with the default (zero) delay. The
// input toggles at random intervals of 6 to 20 ns; one nanosecond before the
// delay has passed the delayed output must still show the old level and one
// nanosecond after it the new level. The zero-delay instance must follow at
// once.
`timescale 1ns / 1ps
module matched_delay_tb;

  localparam int unsigned D = 5;

  logic a, y5, y0;
  int checks = 0, failures = 0;

  matched_delay #(.DELAY(D)) dut5 (.a_i(a), .y_o(y5));
  matched_delay dut0 (.a_i(a), .y_o(y0));

  initial begin
    a = 1'b0;
    #30;
    for (int i = 0; i < 200; i++) begin
      logic old;
      old = a;
      a = ~a;
      #0.1;
      checks++;
      if (y0 !== a) failures++;
      #(D - 1.1);
      checks++;
      if (y5 !== old) begin
        failures++;
        if (failures < 10) $display("toggle %0d: output changed early", i);
      end
      #2;
      checks++;
      if (y5 !== a) begin
        failures++;
        if (failures < 10) $display("toggle %0d: output not changed after %0d ns", i, D);
      end
      #($urandom_range(1, 15));
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
