// switchbox_sd: subset switchbox for a single-driver (unidirectional)
// routing fabric.
//
// In a single-driver fabric every wire has one driver, so each side of the
// box has W incoming wires (t_in) and W outgoing wires (t_out) instead of W
// bidirectional tracks. Each outgoing wire j on side s is driven by a
// multiplexer that picks one of four sources:
//   k = 0..2  the incoming wire of each other side (in increasing side
//             order, skipping s) that lies on the same subset switch point,
//   k = 3     lb_in[j], a logic-block output placed on that track.
// The subset rule is that of the bidirectional box: switch point p holds
// horizontal index p (sides 0 left, 2 right) and vertical index W-1-p
// (sides 1 top, 3 bottom), so every signal stays on its equal-delay
// diagonal when it turns.
//
// The multiplexer per outgoing wire with inputs from the three other sides
// and from the logic block follows the paper's drawing of the single-driver
// subset box. The one-hot select encoding, the source order and the lb_in
// bundle are this design's. The fabric top (safe_fpga) uses the
// bidirectional prototype box; this variant is not instantiated there.
//
// Interface: cfg[(s*W + j)*4 + k] = 1 selects source k for wire j of side
// s (one-hot; if several are set their OR is driven, none drives 0).
// Timing: each output is a buffer, registered on clk (one step per box).
module switchbox_sd #(
  parameter int unsigned W = 8,
  localparam int unsigned NCFG = 4 * W * 4
) (
  input  logic                 clk,
  input  logic [3:0][W-1:0]    t_in,
  input  logic [W-1:0]         lb_in,
  input  logic [NCFG-1:0]      cfg,
  output logic [3:0][W-1:0]    t_out
);
  logic [3:0][W-1:0] nxt;

  always_comb begin
    int unsigned p, si, k;
    logic [$clog2(W)-1:0] idx;
    nxt = '0;
    for (int unsigned s = 0; s < 4; s++)
      for (int unsigned j = 0; j < W; j++) begin
        p = (s % 2 == 0) ? j : W - 1 - j;
        k = 0;
        for (si = 0; si < 4; si++)
          if (si != s) begin
            idx = ($clog2(W))'((si % 2 == 0) ? p : W - 1 - p);
            if (cfg[(s * W + j) * 4 + k]) nxt[s][j] = nxt[s][j] | t_in[si][idx];
            k++;
          end
        if (cfg[(s * W + j) * 4 + 3]) nxt[s][j] = nxt[s][j] | lb_in[j];
      end
  end

  always_ff @(posedge clk) t_out <= nxt;
endmodule
