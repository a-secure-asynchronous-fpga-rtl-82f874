// tb_config_init_cap: exhaustive test of the initialisation cap. With init
// low the cap must acknowledge (0) every non-spacer state of the last stage
// and release (1) on the spacer; with init high it must hold the
// acknowledge at 1 so the chain fills.
module tb_config_init_cap;
  logic init, out0, out1, ack_in;
  logic exp_ack;
  int   checks = 0, failures = 0;

  config_init_cap dut (.init, .out0, .out1, .ack_in);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 8; n++) begin
      {init, out1, out0} = 3'(n);
      #1;
      if (init) exp_ack = 1'b1;
      else      exp_ack = (out1 == 1'b0 && out0 == 1'b0);
      checks++;
      if (ack_in !== exp_ack) begin
        failures++;
        $display("init=%b out=%b%b ack=%b expected %b", init, out1, out0,
                 ack_in, exp_ack);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
