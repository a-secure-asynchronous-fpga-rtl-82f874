// tb_c_element: self-checking test of the unit-delay Muller C-element.
// Random inputs are applied each step; the expected state is kept by the
// testbench (follow the inputs when they agree, hold otherwise) and compared
// with the output one step later.
module tb_c_element;
  logic clk = 1'b0;
  logic a, b, y;
  logic exp_y;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  c_element dut (.clk, .a, .b, .y);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 1'b0; b = 1'b0;
    @(posedge clk); @(negedge clk);
    exp_y = 1'b0;
    for (int n = 0; n < 1000; n++) begin
      a = 1'($urandom); b = 1'($urandom);
      if (a == b) exp_y = a;
      @(negedge clk);
      checks++;
      if (y !== exp_y) begin
        failures++;
        $display("mismatch: a=%b b=%b y=%b expected %b", a, b, y, exp_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
