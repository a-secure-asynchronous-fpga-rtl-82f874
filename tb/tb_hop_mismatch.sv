// tb_hop_mismatch: the "hop mismatch" experiment on the full-size fabric.
//
// A dual-rail signal enters on two pads of the bottom-left I/O block (IOB 0,
// channel h[0][0]) and leaves on two pads of the top-right I/O block (IOB 5,
// channel v[3][2]). Rail 1 always takes the same 5-switchbox route; rail 0
// is routed with 0, 1, 3, 5 and 7 switchboxes more. For each case the
// testbench computes the bitstream (a small router below follows the subset
// switchbox rule: switch point i joins horizontal track i with vertical
// track W-1-i), initialises and configures the chip through the chain, then
// sends four pulses on each rail, as in the experiment, and measures their
// arrival. In this model every switchbox is one step of buffered delay, so
// the arrival difference must equal the hop mismatch, and each rail must
// arrive only on its own pad.
module tb_hop_mismatch;
  import safe_pkg::*;

  localparam int unsigned NX = NX_DEF, NY = NY_DEF, W = W_DEF;
  localparam int unsigned NCFG = cfg_total(NX, NY, W);
  localparam int unsigned NPAD = n_iob(NX, NY) * IOB_NP;
  localparam int SRC_IOB = 0, DST_IOB = 5;
  localparam int NCASE = 5;
  localparam int MAXH = 12;

  logic            clk = 1'b0;
  logic            init, cfg_in0, cfg_in1, cfg_ack_out;
  logic [NPAD-1:0] pad_in, pad_out, pad_oe;
  logic [NCFG-1:0] bits;
  int              checks = 0, failures = 0;
  int              n_pulses = 0, n_configs = 0;

  // Used (segment, track) pairs: segment id = kind*100 + x*10 + y.
  bit              used [int];

  always #5 clk = ~clk;

  safe_fpga dut (.clk, .init, .cfg_in0, .cfg_in1, .cfg_ack_out, .pad_in,
                 .pad_out, .pad_oe);

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("%0t: failed: %s", $time, what);
    end
  endtask

  // Routes as switchbox coordinates {x, y}; -1 ends the list.
  int route_x [NCASE+1][MAXH];
  int route_y [NCASE+1][MAXH];
  int route_n [NCASE+1];
  int mismatch [NCASE] = '{0, 1, 3, 5, 7};

  task automatic set_route(int r, int n, int xs[MAXH], int ys[MAXH]);
    route_n[r] = n;
    for (int k = 0; k < MAXH; k++) begin
      route_x[r][k] = xs[k];
      route_y[r][k] = ys[k];
    end
  endtask

  function automatic int side_present(int x, int y, int s);
    case (s)
      0: return x > 0;
      1: return y < NY;
      2: return x < NX;
      default: return y > 0;
    endcase
  endfunction

  // Pair index of sides {a, b} in the order [0,2],[1,3],[0,1],[1,2],[2,3],[3,0].
  function automatic int pair_of(int a, int b);
    int pa[6] = '{0, 1, 0, 1, 2, 3};
    int pb[6] = '{2, 3, 1, 2, 3, 0};
    for (int p = 0; p < 6; p++)
      if ((pa[p] == a && pb[p] == b) || (pa[p] == b && pb[p] == a)) return p;
    return -1;
  endfunction

  function automatic int pair_rank(int x, int y, int p, output int npair);
    int pa[6] = '{0, 1, 0, 1, 2, 3};
    int pb[6] = '{2, 3, 1, 2, 3, 0};
    int rank = -1;
    npair = 0;
    for (int q = 0; q < 6; q++)
      if (side_present(x, y, pa[q]) && side_present(x, y, pb[q])) begin
        if (q == p) rank = npair;
        npair++;
      end
    return rank;
  endfunction

  // Marks a segment track as used; returns 0 on a clash.
  function automatic bit take(int kind, int x, int y, int t);
    int key = ((kind * 100 + x * 10 + y) * 16) + t;
    if (used.exists(key)) return 1'b0;
    used[key] = 1'b1;
    return 1'b1;
  endfunction

  // Routes one rail starting on track t of h[0][0]; returns the track it
  // arrives on in v[3][2], or -1 on a clash with an earlier rail.
  function automatic int route_rail(int r, int t);
    int se, sx, x, y, i, p, rank, npair, nx_, ny_, kind, segx, segy;
    if (!take(0, 0, 0, t)) return -1;
    x = route_x[r][0]; y = route_y[r][0];
    se = (x == 0) ? 2 : 0;     // enters SB(0,0) from its right, SB(1,0) from its left
    for (int k = 0; k < route_n[r]; k++) begin
      x = route_x[r][k]; y = route_y[r][k];
      if (k == route_n[r] - 1) begin
        sx = (y == 2) ? 1 : 3;  // onto v[3][2]: top of SB(3,2), bottom of SB(3,3)
        kind = 1; segx = 3; segy = 2;
      end else begin
        nx_ = route_x[r][k+1]; ny_ = route_y[r][k+1];
        if (nx_ == x + 1)      begin sx = 2; kind = 0; segx = x;   segy = y;   end
        else if (nx_ == x - 1) begin sx = 0; kind = 0; segx = nx_; segy = y;   end
        else if (ny_ == y + 1) begin sx = 1; kind = 1; segx = x;   segy = y;   end
        else                   begin sx = 3; kind = 1; segx = x;   segy = ny_; end
      end
      i = (se == 0 || se == 2) ? t : W - 1 - t;       // switch point
      t = (sx == 0 || sx == 2) ? i : W - 1 - i;       // track on the way out
      p = pair_of(se, sx);
      rank = pair_rank(x, y, p, npair);
      bits[ofs_sb(x, y, NX, NY, W) + i * npair + rank] = 1'b1;
      if (!take(kind, segx, segy, t)) return -1;
      se = (sx + 2) % 4;
    end
    return t;
  endfunction

  task automatic push(input logic b, output logic taken);
    int t;
    {cfg_in1, cfg_in0} = b ? 2'b10 : 2'b01;
    t = 0;
    do begin @(negedge clk); t++; end while (cfg_ack_out && t < 40);
    taken = !cfg_ack_out;
    {cfg_in1, cfg_in0} = 2'b00;
    if (taken) begin
      t = 0;
      do begin @(negedge clk); t++; end while (!cfg_ack_out && t < 40);
    end
  endtask

  // Sends a pulse on source pad sp; returns the steps until dp rises and
  // checks that op stays low meanwhile.
  task automatic pulse(int sp, int dp, int op, output int lat);
    bit other = 0;
    pad_in[sp] = 1'b1;
    lat = 0;
    do begin
      @(negedge clk); lat++;
      if (pad_out[op]) other = 1;
    end while (!pad_out[dp] && lat < 50);
    pad_in[sp] = 1'b0;
    repeat (20) @(negedge clk);
    check("rail arrives only on its own pad", !other);
    check("pad returns to 0", !pad_out[dp]);
    n_pulses++;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs[MAXH], ys[MAXH];
    // Rail 1 and rail 0 with mismatch 0: SB(1,0) (2,0) (3,0) (3,1) (3,2).
    xs = '{1, 2, 3, 3, 3, -1, -1, -1, -1, -1, -1, -1};
    ys = '{0, 0, 0, 1, 2, -1, -1, -1, -1, -1, -1, -1};
    set_route(NCASE, 5, xs, ys);
    set_route(0, 5, xs, ys);
    // Mismatch 1: SB(0,0) (0,1) (1,1) (2,1) (3,1) (3,2).
    xs = '{0, 0, 1, 2, 3, 3, -1, -1, -1, -1, -1, -1};
    ys = '{0, 1, 1, 1, 1, 2, -1, -1, -1, -1, -1, -1};
    set_route(1, 6, xs, ys);
    // Mismatch 3: SB(0,0) (0,1) (0,2) (1,2) (2,2) (2,1) (3,1) (3,2).
    xs = '{0, 0, 0, 1, 2, 2, 3, 3, -1, -1, -1, -1};
    ys = '{0, 1, 2, 2, 2, 1, 1, 2, -1, -1, -1, -1};
    set_route(2, 8, xs, ys);
    // Mismatch 5: SB(0,0) (0,1) (0,2) (0,3) (1,3) (1,2) (1,1) (2,1) (3,1) (3,2).
    xs = '{0, 0, 0, 0, 1, 1, 1, 2, 3, 3, -1, -1};
    ys = '{0, 1, 2, 3, 3, 2, 1, 1, 1, 2, -1, -1};
    set_route(3, 10, xs, ys);
    // Mismatch 7: SB(0,0) (0,1) (0,2) (0,3) (1,3) (1,2) (1,1) (2,1) (2,0)
    // (3,0) (3,1) (3,2).
    xs = '{0, 0, 0, 0, 1, 1, 1, 2, 2, 3, 3, 3};
    ys = '{0, 1, 2, 3, 3, 2, 1, 1, 0, 0, 1, 2};
    set_route(4, 12, xs, ys);

    pad_in = '0;
    for (int c = 0; c < NCASE; c++) begin
      int t1, t0, s0, d1, d0, l1, l0;
      logic taken;
      bit ok;
      // Bitstream: rail 1 leaves pad 0 of IOB 0 on track 0.
      ok = 0;
      for (int s = 1; s < W && !ok; s++) begin
        bits = '0;
        used.delete();
        t1 = route_rail(NCASE, 0);
        t0 = route_rail(c, s);
        if (t1 < 0 || t0 < 0) continue;
        // Destination pads: even tracks reach pads 0 and 2, odd ones pad 1.
        d1 = (t1 % 2) ? 1 : 0;
        d0 = (t0 % 2) ? 1 : ((d1 == 0) ? 2 : 0);
        if (d0 == d1) continue;
        s0 = (s % 2) ? 1 : 2;
        ok = 1;
        bits[ofs_iob_cb(SRC_IOB, NX, NY, W) + (3 + 0) * 4 + 0] = 1'b1;
        bits[ofs_iob_cb(SRC_IOB, NX, NY, W) + (3 + s0) * 4 + s / 2] = 1'b1;
        bits[ofs_iob_cb(DST_IOB, NX, NY, W) + d1 * 4 + t1 / 2] = 1'b1;
        bits[ofs_iob_cb(DST_IOB, NX, NY, W) + d0 * 4 + t0 / 2] = 1'b1;
        bits[ofs_iob(DST_IOB, NX, NY, W) + d1] = 1'b1;
        bits[ofs_iob(DST_IOB, NX, NY, W) + d0] = 1'b1;
      end
      check("routes found", ok);
      // Initialise and configure.
      init = 1'b0;
      {cfg_in1, cfg_in0} = 2'b00;
      repeat (5 * NCFG) @(negedge clk);
      check("chain empty", cfg_ack_out && dut.cfg == '0);
      init = 1'b1;
      @(negedge clk);
      for (int k = NCFG - 1; k >= 0; k--) push(bits[k], taken);
      repeat (4 * NCFG) @(negedge clk);
      check("configuration stored", dut.cfg == bits);
      n_configs++;
      // Four pulses per rail.
      for (int n = 0; n < 4; n++) begin
        pulse(IOB_NP * SRC_IOB + 0,  IOB_NP * DST_IOB + d1, IOB_NP * DST_IOB + d0, l1);
        pulse(IOB_NP * SRC_IOB + s0, IOB_NP * DST_IOB + d0, IOB_NP * DST_IOB + d1, l0);
        check("rail 1 latency = its 5 switchboxes", l1 == 5);
        check("arrival difference = hop mismatch", l0 - l1 == mismatch[c]);
        if (n == 0)
          $display("hop mismatch %0d: rail 1 arrives after %0d steps, rail 0 after %0d",
                   mismatch[c], l1, l0);
      end
    end
    check("all cases configured", n_configs == NCASE);
    check("pulses sent", n_pulses == 8 * NCASE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
