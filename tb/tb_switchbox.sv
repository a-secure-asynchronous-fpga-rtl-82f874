// tb_switchbox: switch-by-switch test of the three switchbox styles and of
// an edge (1/2) box. For every track and every switch, the testbench closes
// that switch alone, drives a 1 on one of its terminals and checks that the
// 1 appears, one step later, on exactly the other terminal the paper's
// switch set names, and nowhere else; then the same in the other direction.
// The expected terminals are written out here from the paper's formulas:
// subset switch point i joins t(0,i), t(2,i), t(1,W-1-i), t(3,W-1-i);
// twist-on-turn is the set S; twist-always also twists straight pairs.
// A last check closes several switches and checks that two signals entering
// on different tracks do not mix.
module tb_switchbox;
  import safe_pkg::*;
  localparam int unsigned W = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [6*W-1:0]    cfg   [4];
  logic [3:0][W-1:0] t_in  [4];
  logic [3:0][W-1:0] t_out [4];
  int                checks = 0, failures = 0;

  switchbox #(.W(W), .STYLE(SB_SUBSET),        .SIDES(4'b1111)) u_sub
    (.clk, .cfg(cfg[0]),          .t_in(t_in[0]), .t_out(t_out[0]));
  switchbox #(.W(W), .STYLE(SB_TWIST_ON_TURN), .SIDES(4'b1111)) u_tot
    (.clk, .cfg(cfg[1]),          .t_in(t_in[1]), .t_out(t_out[1]));
  switchbox #(.W(W), .STYLE(SB_TWIST_ALWAYS),  .SIDES(4'b1111)) u_ta
    (.clk, .cfg(cfg[2]),          .t_in(t_in[2]), .t_out(t_out[2]));
  // Bottom edge box: left, top and right present.
  switchbox #(.W(W), .STYLE(SB_SUBSET),        .SIDES(4'b0111)) u_half
    (.clk, .cfg(cfg[3][3*W-1:0]), .t_in(t_in[3]), .t_out(t_out[3]));

  // Paper's switch p of track i: sides {sa, sb}, indexes {ia, ib}.
  task automatic expect_pair(int style, int p, int i,
                             output int sa, output int ia,
                             output int sb, output int ib);
    int m = W - 1 - i;
    case (p)
      0: begin sa = 0; sb = 2; end
      1: begin sa = 1; sb = 3; end
      2: begin sa = 0; sb = 1; end
      3: begin sa = 1; sb = 2; end
      4: begin sa = 2; sb = 3; end
      default: begin sa = 3; sb = 0; end
    endcase
    if (style == 0) begin
      ia = (sa == 0 || sa == 2) ? i : m;
      ib = (sb == 0 || sb == 2) ? i : m;
    end else begin
      ia = i;
      case (p)
        0, 1: ib = (style == 2) ? m : i;
        3, 5: ib = m;
        default: ib = i;
      endcase
    end
  endtask

  task automatic one_switch(int d, int style, int npair, int plist[6]);
    int sa, ia, sb, ib;
    logic [3:0][W-1:0] e;
    for (int i = 0; i < W; i++) begin
      for (int r = 0; r < npair; r++) begin
        expect_pair(style, plist[r], i, sa, ia, sb, ib);
        for (int dir = 0; dir < 2; dir++) begin
          cfg[d] = '0;
          cfg[d][i*npair + r] = 1'b1;
          t_in[d] = '0;
          e = '0;
          if (dir == 0) begin t_in[d][sa][ia] = 1'b1; e[sb][ib] = 1'b1; end
          else          begin t_in[d][sb][ib] = 1'b1; e[sa][ia] = 1'b1; end
          @(negedge clk);
          checks++;
          if (t_out[d] !== e) begin
            failures++;
            $display("box %0d track %0d pair %0d dir %0d: out=%h expected %h",
                     d, i, plist[r], dir, t_out[d], e);
          end
        end
      end
    end
    cfg[d] = '0;
    t_in[d] = '0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int full[6] = '{0, 1, 2, 3, 4, 5};
    int half[6] = '{0, 2, 3, 0, 0, 0};   // pairs with both of L, T, R
    for (int d = 0; d < 4; d++) begin cfg[d] = '0; t_in[d] = '0; end
    one_switch(0, 0, 6, full);
    one_switch(1, 1, 6, full);
    one_switch(2, 2, 6, full);
    one_switch(3, 0, 3, half);
    // Two dual-rail buses through the twist-on-turn box: left->top on
    // tracks 0,1 must come out on top tracks 7,6 (twisted), left->right on
    // tracks 3,4 straight on 3,4; inputs held, outputs checked.
    cfg[1] = '0;
    cfg[1][0*6 + 3] = 1'b1;  // [t(1,0), t(2,7)] is pair 3 of track 0
    cfg[1][1*6 + 3] = 1'b1;
    cfg[1][3*6 + 0] = 1'b1;  // [t(0,3), t(2,3)]
    cfg[1][4*6 + 0] = 1'b1;
    t_in[1] = '0;
    t_in[1][0][3] = 1'b1;    // left track 3
    t_in[1][1][1] = 1'b1;    // top track 1 -> right track 6
    @(negedge clk);
    checks++;
    if (t_out[1][2] !== 8'b0100_1000 || t_out[1][1] !== '0 ||
        t_out[1][0] !== '0 || t_out[1][3] !== '0) begin
      failures++;
      $display("bus test: out=%h", t_out[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
