// tb_config_chain: initialisation and configuration of a short chain.
// The testbench plays the external tester: it holds INIT low with spacer
// inputs until the chain is empty (from the random power-up state, which may
// hold forbidden 11 states), then pushes random bitstreams with the 4-phase
// handshake and checks that exactly N acknowledges arrive, that the chain
// then refuses a further token (full), that every stage holds its bit (first
// bit pushed in stage N-1) and that the input accepts a token every 4 steps
// (the first in 3).
// It then re-initialises and configures again.
module tb_config_chain;
  localparam int unsigned N = 24;

  logic         clk = 1'b0;
  logic         init, cfg_in0, cfg_in1, cfg_ack_out;
  logic [N-1:0] cfg_bits;
  logic [N-1:0] stream;
  int           checks = 0, failures = 0;
  int           acks;

  always #5 clk = ~clk;

  config_chain #(.N(N)) dut (.clk, .init, .cfg_in0, .cfg_in1, .cfg_ack_out,
                             .cfg_bits);

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("%0t: failed: %s", $time, what);
    end
  endtask

  // Push one token; returns 1 if it was acknowledged within the limit.
  task automatic push(input logic b, output logic taken);
    int t;
    {cfg_in1, cfg_in0} = b ? 2'b10 : 2'b01;
    t = 0;
    do begin @(negedge clk); t++; end while (cfg_ack_out && t < 40);
    taken = !cfg_ack_out;
    if (taken) acks++;
    {cfg_in1, cfg_in0} = 2'b00;
    if (taken) begin
      t = 0;
      do begin @(negedge clk); t++; end while (!cfg_ack_out && t < 40);
    end
  endtask

  task automatic initialise();
    init = 1'b0;
    {cfg_in1, cfg_in0} = 2'b00;
    repeat (8 * N + 20) @(negedge clk);
    check("ready after INIT", cfg_ack_out);
    check("all stages spacer after INIT", cfg_bits == '0);
    check("internal rails spacer after INIT", dut.u_stages.m0 == '0 && dut.u_stages.m1 == '0 && dut.u_stages.s0 == '0);
    init = 1'b1;
    @(negedge clk);
  endtask

  task automatic configure();
    logic taken;
    int   t0, t1;
    stream = N'({$urandom, $urandom});
    acks = 0;
    t0 = int'($time / 10);
    for (int k = N - 1; k >= 0; k--) push(stream[k], taken);
    t1 = int'($time / 10);
    check("one acknowledge per bit", acks == N);
    $display("pushed %0d tokens in %0d steps", N, t1 - t0);
    // Empty stage: the first token is taken and released in 3 steps, every
    // later one in 4 (the stage ahead must first hand its token on).
    check("input rate: 4 steps per token", (t1 - t0) == 4 * N - 1);
    repeat (4 * N) @(negedge clk);
    check("stored bits", cfg_bits == stream);
    push(1'b1, taken);
    check("full chain refuses a further token", !taken);
    check("stored bits kept after refused token", cfg_bits == stream);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    initialise();
    configure();
    initialise();
    configure();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
