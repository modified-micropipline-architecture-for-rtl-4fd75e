// c_element_tb: self-checking test of the Muller C-element.
//
// Drives random input pairs (and occasional resets) one nanosecond apart and
// compares the output with a reference: after reset the output is 0; when
// both inputs are equal it takes their value; otherwise it keeps the value
// it had. Counts how often the element had to hold (inputs disagreeing)
// and how often it switched up and down, and fails if any never happened.
`timescale 1ns / 1ps
module c_element_tb;

  logic rst_ni, a, b, c;
  logic model;
  int checks = 0, failures = 0;
  int holds = 0, rises = 0, falls = 0;

  c_element dut (
      .rst_ni(rst_ni),
      .a_i   (a),
      .b_i   (b),
      .c_o   (c)
  );

  initial begin
    rst_ni = 1'b0;
    a = 1'b1;
    b = 1'b1;
    model = 1'b0;
    #1;
    checks++;
    if (c !== 1'b0) failures++;
    rst_ni = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      a = 1'($urandom_range(0, 1));
      b = 1'($urandom_range(0, 1));
      if (i % 97 == 96) rst_ni = 1'b0;
      else rst_ni = 1'b1;
      if (!rst_ni) model = 1'b0;
      else if (a == b) begin
        if (a && !model) rises++;
        if (!a && model) falls++;
        model = a;
      end else holds++;
      #1;
      checks++;
      if (c !== model) begin
        failures++;
        if (failures < 10) $display("step %0d: a=%b b=%b rst_ni=%b c=%b expected %b", i, a, b, rst_ni, c, model);
      end
    end
    $display("holds=%0d rises=%0d falls=%0d", holds, rises, falls);
    checks++;
    if (holds == 0 || rises == 0 || falls == 0) failures++;
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
