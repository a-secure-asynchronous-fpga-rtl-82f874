// lut6: balanced 6-input look-up table.
//
// A decoder turns the K inputs into 2^K one-hot select lines dec_j; select
// line j gates configuration bit tt[j] onto the output, and the gated bits
// are OR-combined, so out = tt[in]. In silicon this structure gives every
// input the same load and every configuration bit the same depth to the
// output. The prototype used transmission gates for the gating, which could
// short two memory points together while the inputs switch; here each bit is
// gated by a one-way driver, the fix the paper proposes for its next
// version. The decoder-plus-gated-array structure follows the paper.
//
// Interface: in[K-1:0] is the address (bit 0 = first LUT argument),
// tt[2^K-1:0] the truth table. Combinational.
module lut6 #(
  parameter int unsigned K = 6
) (
  input  logic [K-1:0]    in,
  input  logic [2**K-1:0] tt,
  output logic            out
);
  logic [2**K-1:0] dec;

  always_comb begin
    for (int unsigned j = 0; j < 2**K; j++)
      dec[j] = (in == K'(j));
  end

  assign out = |(dec & tt);
endmodule
