// switchbox: routing switchbox with W tracks per side.
//
// Terminal t(s, i) is track i on side s (0 left, 1 top, 2 right, 3 bottom).
// For every track i there are up to six switches, one per pair of sides,
// each closed by one configuration bit. Which terminals a switch joins
// depends on STYLE:
//   SB_SUBSET        switch point i joins t(0,i), t(2,i), t(1,W-1-i) and
//                    t(3,W-1-i), a diagonal of six-way switch points;
//   SB_TWIST_ON_TURN straight pairs keep their index, the turns
//                    top->right and bottom->left go to index W-1-i, so a
//                    bus that turns comes out twisted;
//   SB_TWIST_ALWAYS  as twist-on-turn, and straight pairs also go to
//                    W-1-i, so every bus is twisted at every box.
// A box on the edge of the array lacks one or two sides (SIDES); it then has
// 3 or 1 switches per track instead of 6.
//
// A pass switch is bidirectional. Here every terminal has a value arriving
// from outside (t_in) and a value the box drives onto it (t_out); a closed
// switch (a, b) ORs t_in(b) into t_out(a) and t_in(a) into t_out(b). The
// outputs are registered, one clk step per box, standing for the buffered
// channel. The switch sets follow the paper; the directed model and the
// step delay are this design's.
//
// Configuration: cfg[i*NPAIR + r] is the r-th present pair of track i, pairs
// taken in the order [0,2], [1,3], [0,1], [1,2], [2,3], [3,0].
module switchbox
  import safe_pkg::*;
#(
  parameter int unsigned W     = W_DEF,
  parameter sb_style_e   STYLE = SB_SUBSET,
  parameter logic [3:0]  SIDES = 4'b1111,
  localparam int unsigned NPAIR = sb_pairs_present(SIDES),
  localparam int unsigned NCFG  = NPAIR * W
) (
  input  logic                  clk,
  input  logic [NCFG-1:0]       cfg,
  input  logic [3:0][W-1:0]     t_in,
  output logic [3:0][W-1:0]     t_out
);
  logic [3:0][W-1:0] nxt;

  always_comb begin
    int unsigned r;
    logic [$clog2(W)-1:0] ia, ib;
    side_e sa, sb;
    nxt = '0;
    for (int unsigned i = 0; i < W; i++) begin
      r = 0;
      for (int unsigned p = 0; p < SB_PAIRS; p++) begin
        sa = pair_side_a(p);
        sb = pair_side_b(p);
        ia = $clog2(W)'(sb_idx(STYLE, p, i, W, 1'b0));
        ib = $clog2(W)'(sb_idx(STYLE, p, i, W, 1'b1));
        if (SIDES[sa] && SIDES[sb]) begin
          if (cfg[i*NPAIR + r]) begin
            nxt[sa][ia] = nxt[sa][ia] | t_in[sb][ib];
            nxt[sb][ib] = nxt[sb][ib] | t_in[sa][ia];
          end
          r++;
        end
      end
    end
  end

  always_ff @(posedge clk) t_out <= nxt;
endmodule
