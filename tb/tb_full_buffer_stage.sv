// tb_full_buffer_stage: handshake test of one configuration-chain stage.
// The testbench plays the previous stage (source) and the next stage (sink).
// It drains the stage from its random power-up state, then checks for each
// random token: the acknowledge falls one step after the token arrives, the
// token reaches s0/s1 two steps after it is driven, the acknowledge rises
// after the source returns to the spacer, a second token is refused while the
// sink has not acknowledged the first (stall), and is passed once it has.
module tb_full_buffer_stage;
  logic clk = 1'b0;
  logic e0, e1, e_ack, s0, s1, s_ack;
  int   checks = 0, failures = 0;
  int   stalls = 0;

  always #5 clk = ~clk;

  full_buffer_stage dut (.clk, .e0, .e1, .e_ack, .s0, .s1, .s_ack);

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("%0t: failed: %s (e=%b%b e_ack=%b s=%b%b)", $time, what, e1,
               e0, e_ack, s1, s0);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic b, b2;
    // Drain: spacer at the input, sink acknowledges whatever it sees.
    e0 = 0; e1 = 0; s_ack = 1;
    repeat (20) begin
      @(negedge clk);
      s_ack = ~(s0 | s1);
    end
    s_ack = 1;
    repeat (4) @(negedge clk);
    check("empty after drain", e_ack && !s0 && !s1);

    for (int n = 0; n < 200; n++) begin
      b = 1'($urandom);
      {e1, e0} = b ? 2'b10 : 2'b01;
      @(negedge clk);
      check("ack falls one step after token", !e_ack);
      @(negedge clk);
      check("token at output after two steps", {s1, s0} == (b ? 2'b10 : 2'b01));
      {e1, e0} = 2'b00;
      @(negedge clk);
      check("ack rises after spacer", e_ack);
      // Second token while the sink has not acknowledged: must stall.
      b2 = 1'($urandom);
      {e1, e0} = b2 ? 2'b10 : 2'b01;
      repeat (5) @(negedge clk);
      check("stall: second token refused", e_ack);
      check("stall: first token held", {s1, s0} == (b ? 2'b10 : 2'b01));
      stalls++;
      // Sink acknowledges (0), then releases when the output is spacer.
      s_ack = 0;
      repeat (2) @(negedge clk);
      check("output returns to spacer", {s1, s0} == 2'b00);
      s_ack = 1;
      repeat (2) @(negedge clk);
      check("second token passed", {s1, s0} == (b2 ? 2'b10 : 2'b01));
      {e1, e0} = 2'b00;
      s_ack = 0;
      repeat (3) @(negedge clk);
      s_ack = 1;
      @(negedge clk);
      check("empty again", e_ack && {s1, s0} == 2'b00);
    end
    check("stall seen", stalls > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
