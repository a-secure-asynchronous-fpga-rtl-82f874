// tb_switchbox_sd: checks the single-driver subset switchbox.
//
// For random inputs and random one-hot selects, every outgoing wire must
// carry, one step later, the source its select names. The expected source
// is worked out from the subset rule directly: a wire at side s, index j
// is on switch point j if s is left/right and W-1-j if s is top/bottom; the
// source on side si is the incoming wire with the same point. A second
// phase sets all selects to 0 and checks that every output is 0, and a
// third closes a route left -> top -> right through two boxes in series to
// check the twist back onto the original index and the two-step latency.
module tb_switchbox_sd;
  localparam int unsigned W = 8;
  localparam int unsigned NCFG = 4 * W * 4;

  logic                 clk = 1'b0;
  logic [3:0][W-1:0]    t_in, t_out, t_out2, t_in2;
  logic [W-1:0]         lb_in;
  logic [NCFG-1:0]      cfg, cfg2;
  int                   src [4][W];
  int                   checks = 0, failures = 0;

  always #5 clk = ~clk;

  switchbox_sd #(.W(W)) dut  (.clk, .t_in, .lb_in, .cfg, .t_out);
  switchbox_sd #(.W(W)) dut2 (.clk, .t_in(t_in2), .lb_in('0), .cfg(cfg2), .t_out(t_out2));

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("%0t: failed: %s", $time, what);
    end
  endtask

  // Expected value of outgoing wire (s, j) for source k.
  function automatic logic expect_bit(int s, int j, int k);
    int others[3];
    int n = 0, si, pt;
    for (int q = 0; q < 4; q++) if (q != s) others[n++] = q;
    if (k == 3) return lb_in[j];
    si = others[k];
    pt = (s == 0 || s == 2) ? j : W - 1 - j;
    return t_in[si][(si == 0 || si == 2) ? pt : W - 1 - pt];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t_in2 = '0; cfg2 = '0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      cfg = '0;
      for (int s = 0; s < 4; s++)
        for (int j = 0; j < W; j++) begin
          src[s][j] = $urandom_range(0, 3);
          cfg[(s * W + j) * 4 + src[s][j]] = 1'b1;
        end
      t_in  = $urandom;
      lb_in = W'($urandom);
      @(negedge clk);
      for (int s = 0; s < 4; s++)
        for (int j = 0; j < W; j++)
          check($sformatf("side %0d wire %0d source %0d", s, j, src[s][j]),
                t_out[s][j] == expect_bit(s, j, src[s][j]));
    end
    // No select: nothing driven.
    cfg = '0; t_in = '1; lb_in = '1;
    @(negedge clk);
    check("unselected outputs stay 0", t_out == '0);
    // Two boxes: left track 2 of box 1 -> its top, which feeds box 2's
    // bottom -> box 2's right. Left index 2 is point 2, top index 5, and
    // back on the right index 2.
    t_in = '0; lb_in = '0;
    cfg = '0;  cfg[(1 * W + 5) * 4 + 0] = 1'b1;   // top 5 from left (k=0)
    cfg2 = '0; cfg2[(2 * W + 2) * 4 + 2] = 1'b1;  // right 2 from bottom (k=2)
    @(negedge clk);
    t_in[0][2] = 1'b1;
    for (int t = 1; t <= 2; t++) begin
      @(negedge clk);
      t_in2[3] = t_out[1];
      if (t == 1) check("turn onto top track W-1-i after 1 step", t_out[1] == W'(1 << 5));
    end
    @(negedge clk);
    check("straight-out on the original index after 2 boxes", t_out2[2] == W'(1 << 2));
    check("nothing else driven", t_out2[0] == '0 && t_out2[1] == '0 && t_out2[3] == '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
