// stage_ctrl_tb: self-checking test of one modified micropipeline stage.
//
// Two stages are tested side by side: an ordinary stage (two C-elements)
// and the first stage (one C-element, its request being the global
// request). First the four steps of the modified four-phase protocol are
// walked through in order; then the three inputs change at random, one at
// a time, and both outputs are compared with a reference built from the
// C-element rule. The test counts the two situations that the added
// C-element creates and fails if either never occurs:
//   locked: the token is present but the stage waits for the global request;
//   held:   the token has gone but the stage output stays high until the
//           global request falls.
`timescale 1ns / 1ps
module stage_ctrl_tb;

  logic rst_ni, rg, rq, an;
  logic tok, fire, tok1, fire1;
  logic m_tok, m_fire, m_tok1;
  int checks = 0, failures = 0;
  int locked = 0, held = 0;

  stage_ctrl #(.FIRST(1'b0)) dut (
      .rst_ni(rst_ni), .req_global_i(rg), .req_i(rq), .ack_next_i(an),
      .token_o(tok), .fire_o(fire)
  );

  // first stage: its request input is the global request
  stage_ctrl #(.FIRST(1'b1)) dut1 (
      .rst_ni(rst_ni), .req_global_i(rg), .req_i(rg), .ack_next_i(an),
      .token_o(tok1), .fire_o(fire1)
  );

  function automatic logic celem(logic a, logic b, logic c);
    return (a == b) ? a : c;
  endfunction

  task automatic step(string what);
    m_tok  = celem(rq, ~an, m_tok);
    m_fire = celem(m_tok, rg, m_fire);
    m_tok1 = celem(rg, ~an, m_tok1);
    #1;
    checks++;
    if (tok !== m_tok || fire !== m_fire || tok1 !== m_tok1 || fire1 !== m_tok1) begin
      failures++;
      if (failures < 10)
        $display("%s: rg=%b rq=%b an=%b tok=%b fire=%b first=%b expected %b %b %b", what, rg, rq,
                 an, tok, fire, fire1, m_tok, m_fire, m_tok1);
    end
    if (m_tok && !m_fire && !rg) locked++;
    if (!m_tok && m_fire && rg) held++;
  endtask

  initial begin
    rst_ni = 1'b0;
    rg = 1'b0;
    rq = 1'b0;
    an = 1'b0;
    m_tok = 1'b0;
    m_fire = 1'b0;
    m_tok1 = 1'b0;
    #1;
    rst_ni = 1'b1;
    // Step 1: request from the previous stage arrives, global request high
    rq = 1'b1;
    step("token without global request");   // locked
    checks++;
    if (fire !== 1'b0) failures++;
    rg = 1'b1;
    step("step 1");
    checks++;
    if (fire !== 1'b1 || fire1 !== 1'b1) failures++;
    // Step 2: next stage acknowledges while the global request is high
    an = 1'b1;
    step("step 2");
    // Step 3: previous request falls; output waits for the global request
    rq = 1'b0;
    step("previous request low");            // held
    checks++;
    if (fire !== 1'b1) failures++;
    rg = 1'b0;
    step("step 3");
    checks++;
    if (fire !== 1'b0 || fire1 !== 1'b0) failures++;
    // Step 4: acknowledge withdrawn while the global request is low
    an = 1'b0;
    step("step 4");
    // random single-input changes
    for (int i = 0; i < 5000; i++) begin
      case ($urandom_range(0, 2))
        0: rg = ~rg;
        1: rq = ~rq;
        default: an = ~an;
      endcase
      step("random");
    end
    $display("locked=%0d held=%0d", locked, held);
    checks++;
    if (locked == 0 || held == 0) failures++;
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
