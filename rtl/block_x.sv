// block_x: input steering cell of the PLB output block P.
//
// The single programming point c sends input d either to output u (c = 1)
// or to output v (c = 0); the unused output stays at 0, so in a 4-phase
// circuit it stays at the spacer value. Ports d, u, v and the programming
// point follow the paper's drawing of block X; the two gates are taken as
// AND gates, one fed with c and one with its inverse (this design's reading
// of the drawing).
//
// Interface: combinational, u = d & c, v = d & ~c.
module block_x (
  input  logic d,
  input  logic c,
  output logic u,
  output logic v
);
  assign u = d &  c;
  assign v = d & ~c;
endmodule
