// iob: I/O block of three pads.
//
// Each pad has one configuration bit: 1 makes it an output, driven from the
// fabric side (from_fabric) with its output enable raised; 0 makes it an
// input, and the pin value is passed to the fabric (to_fabric). A pad that is
// an output passes 0 to the fabric and one that is an input drives 0 with
// its output enable low. The paper gives the number of pads and of bits per
// I/O block; the meaning of the bit is this design's choice.
//
// Interface: combinational.
module iob #(
  parameter int unsigned NP = 3
) (
  input  logic [NP-1:0] cfg,
  input  logic [NP-1:0] pad_in,
  output logic [NP-1:0] pad_out,
  output logic [NP-1:0] pad_oe,
  input  logic [NP-1:0] from_fabric,
  output logic [NP-1:0] to_fabric
);
  assign pad_oe    = cfg;
  assign pad_out   = from_fabric & cfg;
  assign to_fabric = pad_in & ~cfg;
endmodule
