// tb_lut6: random truth tables and addresses; the output must equal the
// addressed truth-table bit.
module tb_lut6;
  logic [5:0]  in;
  logic [63:0] tt;
  logic        out;
  int          checks = 0, failures = 0;

  lut6 #(.K(6)) dut (.in, .tt, .out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      tt = {$urandom, $urandom};
      for (int a = 0; a < 64; a++) begin
        in = 6'(a);
        #1;
        checks++;
        if (out !== tt[a]) begin
          failures++;
          $display("tt=%h in=%0d out=%b", tt, a, out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
