// config_init_cap: initialisation circuitry at the end of the configuration
// chain.
//
// During initialisation (init = 0) the cap acts as a sink: it acknowledges
// (ack_in = 0) any non-spacer state of the last stage, including the
// forbidden 11 left by power-up, and releases (ack_in = 1) once the last stage
// is back to the spacer 00. With the chain input held at 00, every token
// drains out of the end and spacers fill the chain. During configuration
// (init = 1) ack_in is held at 1 so tokens pile up until the chain is full.
//
// The paper's schematic has a NOR of the two output rails combined with INIT;
// the combining gate is taken to be an OR, a choice of this design made so
// that the chain drains as the paper describes.
//
// Interface: purely combinational, ack_in = init | ~(out0 | out1).
module config_init_cap (
  input  logic init,
  input  logic out0,
  input  logic out1,
  output logic ack_in
);
  assign ack_in = init | ~(out0 | out1);
endmodule
