// c_element: WIDTH independent two-input Muller C-elements with a unit gate
// delay.
//
// Each output bit copies its two inputs when they agree and holds its value
// when they differ. The asynchronous fabric has no clock; here every
// state-holding gate is given one step of delay by updating its state on the
// rising edge of clk, a simulation step that stands for "one gate delay". A
// quasi-delay-insensitive circuit behaves the same for any gate delays, so
// this is one legal timing of the real circuit. There is deliberately no
// reset: the configuration chain built from these cells clears itself
// through its INIT procedure.
//
// Interface: a, b in; y out, y changes one clk step after a and b agree.
module c_element #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] y
);
  always_ff @(posedge clk)
    y <= (a & b) | (y & (a | b));
endmodule
