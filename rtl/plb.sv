// plb: programmable logic block of the SAFE fabric.
//
// Four 6-input LUTs. LUTs 0 and 1 read inputs I0..I5, LUTs 2 and 3 read
// J0..J5. Inputs 0..3 of every LUT pass a programmed multiplexer that takes
// either the PLB input of that index or the feedback O_m of LUT m on input m,
// which is how a LUT output is fed back to implement the hold term of a
// 4-phase gate (O = f(x,y) when inputs are valid and the acknowledge is low,
// 0 when inputs are spacers and the acknowledge is high, O otherwise).
// Outputs: O0..O3 are the LUT outputs, O4/O5 the P/Q outputs of block P fed
// by O0..O3, and O6 = O4 xor O5, the acknowledge of a dual-rail gate whose
// rails are O4 and O5.
//
// Configuration layout (cfg): bits 64k..64k+63 are the truth table of LUT k,
// bit 256+4k+m selects feedback (1) or PLB input (0) for input m of LUT k,
// bits 272..277 are block P's (X selects for A..D, P select, Q select). The
// LUT/feedback/block P structure follows the paper's PLB drawing; the bit
// layout is this design's. The paper counts 287 configuration bits per PLB;
// the nine whose use it does not describe are not included.
//
// Timing: LUT outputs are registered, one clk step per LUT (gate-delay
// model), so feedback loops carry one step of delay.
module plb
  import safe_pkg::*;
(
  input  logic                clk,
  input  logic [5:0]          i_in,
  input  logic [5:0]          j_in,
  input  logic [PLB_BITS-1:0] cfg,
  output logic [PLB_NO-1:0]   o
);
  logic [3:0] lut_q;      // registered LUT outputs, O0..O3
  logic [3:0] lut_d;
  logic       p, q;

  for (genvar k = 0; k < 4; k++) begin : g_lut
    logic [5:0] src, lin;
    logic [3:0] fb_sel;

    assign src    = (k < 2) ? i_in : j_in;
    assign fb_sel = cfg[PLB_MUX_OFS + 4*k +: 4];

    always_comb begin
      lin = src;
      for (int m = 0; m < 4; m++)
        if (fb_sel[m]) lin[m] = lut_q[m];
    end

    lut6 #(.K(LUT_K)) u_lut (
      .in(lin), .tt(cfg[LUT_BITS*k +: LUT_BITS]), .out(lut_d[k])
    );
  end

  always_ff @(posedge clk) lut_q <= lut_d;

  block_p u_p (
    .clk, .a(lut_q[0]), .b(lut_q[1]), .c(lut_q[2]), .d(lut_q[3]),
    .cfg(cfg[PLB_P_OFS +: 6]), .p, .q
  );

  assign o = {p ^ q, q, p, lut_q};
endmodule
