// tb_iob: exhaustive test of the three-pad I/O block: a pad configured as
// output drives from_fabric with its enable high and passes 0 inward; a pad
// configured as input passes the pin inward and drives 0 with enable low.
module tb_iob;
  logic [2:0] cfg, pad_in, pad_out, pad_oe, from_fabric, to_fabric;
  int         checks = 0, failures = 0;

  iob #(.NP(3)) dut (.cfg, .pad_in, .pad_out, .pad_oe, .from_fabric,
                     .to_fabric);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 512; n++) begin
      {cfg, pad_in, from_fabric} = 9'(n);
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (cfg[p]) begin
          if (pad_oe[p] !== 1'b1 || pad_out[p] !== from_fabric[p] ||
              to_fabric[p] !== 1'b0) failures++;
        end else begin
          if (pad_oe[p] !== 1'b0 || pad_out[p] !== 1'b0 ||
              to_fabric[p] !== pad_in[p]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
