// tb_block_p: test of the PLB output block.
// Part 1, combinational outputs: for random steering bits and inputs, P must
// be the XOR of the inputs steered to P and Q the XOR of the others.
// Part 2, memory elements: with A = x&y, B = x|y (and C, D likewise) and the
// output selects set, P and Q must behave as C-elements on (x, y): follow
// when x = y, hold otherwise, one step after the inputs change.
module tb_block_p;
  logic       clk = 1'b0;
  logic       a, b, c, d, p, q;
  logic [5:0] cfg;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  block_p dut (.clk, .a, .b, .c, .d, .cfg, .p, .q);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] in;
    logic       ep, eq, x, y, x2, y2, cp, cq;
    // Part 1.
    for (int n = 0; n < 500; n++) begin
      cfg[3:0] = 4'($urandom);
      cfg[5:4] = 2'b00;
      in = 4'($urandom);
      {d, c, b, a} = in;
      #1;
      ep = 1'b0; eq = 1'b0;
      for (int k = 0; k < 4; k++) begin
        if (cfg[k]) ep = ep ^ in[k];
        else        eq = eq ^ in[k];
      end
      checks++;
      if (p !== ep || q !== eq) begin
        failures++;
        $display("comb: cfg=%b in=%b p=%b q=%b exp %b %b", cfg, in, p, q, ep, eq);
      end
      @(negedge clk);
    end
    // Part 2.
    cfg = 6'b110000;
    x = 0; y = 0; x2 = 0; y2 = 0;
    {b, a} = {x | y, x & y};
    {d, c} = {x2 | y2, x2 & y2};
    repeat (2) @(negedge clk);
    cp = 1'b0; cq = 1'b0;
    for (int n = 0; n < 1000; n++) begin
      x = 1'($urandom); y = 1'($urandom);
      x2 = 1'($urandom); y2 = 1'($urandom);
      {b, a} = {x | y, x & y};
      {d, c} = {x2 | y2, x2 & y2};
      if (x == y)   cp = x;
      if (x2 == y2) cq = x2;
      @(negedge clk);
      checks++;
      if (p !== cp || q !== cq) begin
        failures++;
        $display("mem: x=%b y=%b p=%b exp %b, x2=%b y2=%b q=%b exp %b",
                 x, y, p, cp, x2, y2, q, cq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
