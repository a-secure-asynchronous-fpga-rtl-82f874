// tb_block_x: exhaustive test of the steering cell: d goes to u when the
// programming point is 1 and to v when it is 0; the other output is 0.
module tb_block_x;
  logic d, c, u, v;
  int   checks = 0, failures = 0;

  block_x dut (.d, .c, .u, .v);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4; n++) begin
      {c, d} = 2'(n);
      #1;
      checks++;
      if (u !== (c ? d : 1'b0) || v !== (c ? 1'b0 : d)) begin
        failures++;
        $display("c=%b d=%b u=%b v=%b", c, d, u, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
