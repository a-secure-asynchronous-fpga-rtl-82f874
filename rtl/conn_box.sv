// conn_box: crossbar connection box between a routing channel and a block.
//
// NI input pins read the W wires of chan_in; NO output pins drive the W
// wires of chan_drv. Every crossing of a pin and a wire has one switch (Fc =
// 1, HALF = 0) or, with HALF = 1 (Fc = 0.5), pin p has switches only to the
// wires w with w mod 2 = p mod 2. A closed switch ORs the wire onto the input
// pin, or the output pin onto the wire. The silicon builds this as two
// superimposed balanced binary trees so that every path has the same length;
// that is a layout property and does not change the logic. The Fc values
// follow the paper, the choice of wires for Fc = 0.5 is this design's.
//
// Configuration: input pins first, pin-major (pin p, its j-th reachable
// wire), then output pins likewise. Combinational.
module conn_box #(
  parameter int unsigned W    = 8,
  parameter int unsigned NI   = 12,
  parameter int unsigned NO   = 7,
  parameter bit          HALF = 1'b0,
  localparam int unsigned NW   = HALF ? W / 2 : W,
  localparam int unsigned NCFG = (NI + NO) * NW
) (
  input  logic [NCFG-1:0] cfg,
  input  logic [W-1:0]    chan_in,
  output logic [NI-1:0]   pin_in,
  input  logic [NO-1:0]   pin_out,
  output logic [W-1:0]    chan_drv
);
  function automatic int unsigned wire_of(int unsigned pin, int unsigned j);
    return HALF ? 2*j + (pin % 2) : j;
  endfunction

  always_comb begin
    pin_in   = '0;
    chan_drv = '0;
    for (int unsigned p = 0; p < NI; p++)
      for (int unsigned j = 0; j < NW; j++)
        if (cfg[p*NW + j]) pin_in[p] = pin_in[p] | chan_in[wire_of(p, j)];
    for (int unsigned q = 0; q < NO; q++)
      for (int unsigned j = 0; j < NW; j++)
        if (cfg[(NI + q)*NW + j])
          chan_drv[wire_of(q, j)] = chan_drv[wire_of(q, j)] | pin_out[q];
  end
endmodule
