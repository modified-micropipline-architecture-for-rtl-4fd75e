// tap_register_tb: self-checking test of the edge-triggered tap register.
//
// Changes the data input at random while the stage request (clock) is high,
// low, and at its rising edge, and checks that the register loads only on
// the rising edge: a transparent latch would follow the data while the
// request stays high, which is the failure the edge-triggered register is
// there to prevent. Also checks the asynchronous reset.
`timescale 1ns / 1ps
module tap_register_tb;

  localparam int unsigned W = 12;

  logic         clk, rst_ni;
  logic [W-1:0] d, q, model;
  int checks = 0, failures = 0;

  tap_register #(.WIDTH(W)) dut (
      .clk_i (clk),
      .rst_ni(rst_ni),
      .d_i   (d),
      .q_o   (q)
  );

  task automatic check(string what);
    checks++;
    if (q !== model) begin
      failures++;
      if (failures < 10) $display("%s: q=%h expected %h", what, q, model);
    end
  endtask

  initial begin
    clk = 1'b0;
    rst_ni = 1'b0;
    d = '1;
    model = '0;
    #1 check("reset");
    rst_ni = 1'b1;
    for (int i = 0; i < 500; i++) begin
      d = W'($urandom);
      #1;
      clk = 1'b1;                // rising edge: load
      model = d;
      #1 check("after edge");
      d = W'($urandom);          // data changes while request high
      #1 check("request high");
      clk = 1'b0;
      #1 check("falling edge");
      d = W'($urandom);          // data changes while request low
      #1 check("request low");
      if (i % 50 == 49) begin
        rst_ni = 1'b0;
        model = '0;
        #1 check("async reset");
        rst_ni = 1'b1;
      end
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
