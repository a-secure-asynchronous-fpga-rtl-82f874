// tb_conn_box: random test of the PLB (Fc = 1) and I/O (Fc = 0.5)
// connection boxes. For random switch settings, channel values and output
// pins, each input pin must be the OR of the channel wires it is switched
// to, and each channel wire the OR of the output pins switched to it. For
// Fc = 0.5 the testbench builds the full pin-by-wire matrix and leaves out
// the crossings the box does not have (wire parity differs from the parity of
// the pin's index among the input pins or among the output pins).
module tb_conn_box;
  localparam int unsigned W = 8;

  logic [(12+7)*W-1:0] cfg_p;
  logic [W-1:0]        chan_p, drv_p;
  logic [11:0]         pin_in_p;
  logic [6:0]          pin_out_p;

  logic [(3+3)*W/2-1:0] cfg_i;
  logic [W-1:0]         chan_i, drv_i;
  logic [2:0]           pin_in_i, pin_out_i;

  int checks = 0, failures = 0;

  conn_box #(.W(W), .NI(12), .NO(7), .HALF(1'b0)) u_plb_cb
    (.cfg(cfg_p), .chan_in(chan_p), .pin_in(pin_in_p), .pin_out(pin_out_p),
     .chan_drv(drv_p));
  conn_box #(.W(W), .NI(3), .NO(3), .HALF(1'b1)) u_iob_cb
    (.cfg(cfg_i), .chan_in(chan_i), .pin_in(pin_in_i), .pin_out(pin_out_i),
     .chan_drv(drv_i));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic sw [32][W];   // switch matrix: pin (inputs then outputs) x wire
    logic [11:0] ein;
    logic [W-1:0] edrv;
    for (int n = 0; n < 300; n++) begin
      // ---- Fc = 1
      for (int k = 0; k < (12+7)*W; k++) cfg_p[k] = ($urandom % 4) == 0;
      chan_p = W'($urandom); pin_out_p = 7'($urandom);
      #1;
      for (int p = 0; p < 19; p++)
        for (int w = 0; w < W; w++) sw[p][w] = cfg_p[p*W + w];
      ein = '0; edrv = '0;
      for (int w = 0; w < W; w++) begin
        for (int p = 0; p < 12; p++) if (sw[p][w] && chan_p[w]) ein[p] = 1'b1;
        for (int q = 0; q < 7; q++)  if (sw[12+q][w] && pin_out_p[q]) edrv[w] = 1'b1;
      end
      checks++;
      if (pin_in_p !== ein || drv_p !== edrv) begin
        failures++;
        $display("Fc=1: pin_in=%h exp %h drv=%h exp %h", pin_in_p, ein, drv_p, edrv);
      end
      // ---- Fc = 0.5
      cfg_i = 24'($urandom);
      chan_i = W'($urandom); pin_out_i = 3'($urandom);
      #1;
      for (int p = 0; p < 6; p++)
        for (int w = 0; w < W; w++)
          sw[p][w] = (w % 2 == (p % 3) % 2) ? cfg_i[p*(W/2) + w/2] : 1'b0;
      ein = '0; edrv = '0;
      for (int w = 0; w < W; w++) begin
        for (int p = 0; p < 3; p++) if (sw[p][w] && chan_i[w]) ein[p] = 1'b1;
        for (int q = 0; q < 3; q++) if (sw[3+q][w] && pin_out_i[q]) edrv[w] = 1'b1;
      end
      checks++;
      if (pin_in_i !== ein[2:0] || drv_i !== edrv) begin
        failures++;
        $display("Fc=0.5: pin_in=%b exp %b drv=%h exp %h", pin_in_i, ein[2:0],
                 drv_i, edrv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
