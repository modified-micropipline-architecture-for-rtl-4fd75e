// async_fir_lock_tb: the global-request gating of the whole filter when the
// request wave is slower than the global request.
//
// The filter is built with a 3 ns delay between stages and driven by a
// free-running sampling unit that raises req_i for 2 ns every 12 ns without
// waiting for acknowledges; the receiver answers req_o after 1 ns. The
// request wave then cannot cross 32 stages within one request pulse, so
// tokens reach stages while req_i is low. The test checks, for every stage
// after the first, the two rules of the added C-element:
//   - a stage output never rises while req_i is low (token locked);
//   - a token locked when req_i rises fires its stage in that same instant;
// and counts locks and releases, failing if none happened. Data values are
// not checked here: with a positive stage delay the register chain no longer
// shifts one place per sample (see the README); the end-to-end data test
// is async_fir_tb.
`timescale 1ns / 1ps
module async_fir_lock_tb;
  import fir_pkg::*;

  logic    rst_ni, req_i, ack_o, req_o, ack_i;
  sample_t data_i;
  acc_t    data_o;
  int checks = 0, failures = 0, locks = 0, releases = 0;

  async_fir #(.DELAY(3)) dut (
      .rst_ni(rst_ni),
      .req_i (req_i),
      .ack_o (ack_o),
      .data_i(data_i),
      .req_o (req_o),
      .ack_i (ack_i),
      .data_o(data_o)
  );

  logic [TAPS-1:0] tok, fire;
  for (genvar g = 0; g < TAPS; g++) begin : g_peek
    assign tok[g]  = dut.g_stage[g].u_ctrl.token_o;
    assign fire[g] = dut.g_stage[g].u_ctrl.fire_o;
  end

  // receiver
  always @(req_o) ack_i <= #1 req_o;

  // rule 1: no stage after the first rises while the global request is low
  for (genvar g = 1; g < TAPS; g++) begin : g_rule
    always @(posedge fire[g]) begin
      if (rst_ni) begin
        checks++;
        if (!req_i) begin
          failures++;
          $display("stage %0d fired while req_i low at %0t", g, $time);
        end
      end
    end
  end

  // rule 2: tokens locked while req_i was low fire as soon as it rises
  logic [TAPS-1:0] locked_mask;
  initial begin
    rst_ni = 1'b0;
    req_i = 1'b0;
    data_i = '0;
    #5 rst_ni = 1'b1;
    #5;
    for (int n = 0; n < 300; n++) begin
      data_i = sample_t'($urandom);
      #9.9;
      locked_mask = tok & ~fire & ~TAPS'(1);
      locks += $countones(locked_mask);
      #0.1 req_i = 1'b1;
      #0.01;
      if (locked_mask != '0) begin
        checks++;
        if ((fire & locked_mask) != locked_mask) begin
          failures++;
          $display("locked tokens %b not released at %0t", locked_mask, $time);
        end else releases += $countones(locked_mask);
      end
      #1.99 req_i = 1'b0;
    end
    $display("locks=%0d releases=%0d", locks, releases);
    checks++;
    if (locks == 0 || releases == 0) failures++;
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
