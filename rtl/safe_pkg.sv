// safe_pkg: constants and types shared by the SAFE asynchronous FPGA fabric.
//
// The fabric is a 3x3 array of programmable logic blocks (PLBs) with a routing
// channel width of 8, as in the 65 nm prototype. All sizes below follow the
// prototype; bit layouts and the order of configuration bits in the chain are
// this design's own choices and are documented next to each constant.
package safe_pkg;

  // Routing channel width and array size of the prototype.
  localparam int unsigned W_DEF  = 8;
  localparam int unsigned NX_DEF = 3;
  localparam int unsigned NY_DEF = 3;

  // PLB: 12 inputs (I0..I5, J0..J5), 7 outputs (O0..O6), four 6-input LUTs.
  localparam int unsigned PLB_NI   = 12;
  localparam int unsigned PLB_NO   = 7;
  localparam int unsigned LUT_K    = 6;
  localparam int unsigned LUT_BITS = 1 << LUT_K;           // 64
  // PLB configuration layout: 4 truth tables, 16 feedback-multiplexer bits,
  // 4 X-block bits and 2 output-multiplexer bits of block P.
  localparam int unsigned PLB_MUX_OFS = 4 * LUT_BITS;      // 256
  localparam int unsigned PLB_P_OFS   = PLB_MUX_OFS + 16;  // 272
  localparam int unsigned PLB_BITS    = PLB_P_OFS + 6;     // 278

  // I/O block: 3 pads, one direction bit each; its connection box has
  // 3 inputs and 3 outputs at Fc = 0.5.
  localparam int unsigned IOB_NP = 3;

  // Switchbox sides, as in the t(side, index) terminal notation.
  typedef enum logic [1:0] {
    SIDE_LEFT   = 2'd0,
    SIDE_TOP    = 2'd1,
    SIDE_RIGHT  = 2'd2,
    SIDE_BOTTOM = 2'd3
  } side_e;

  // Switchbox flavours of the routing architecture.
  typedef enum logic [1:0] {
    SB_SUBSET        = 2'd0,  // six-way switch points on a diagonal
    SB_TWIST_ON_TURN = 2'd1,  // every turning pair comes out twisted
    SB_TWIST_ALWAYS  = 2'd2   // straight connections are twisted too
  } sb_style_e;

  // One 1-out-of-2 (dual-rail) wire pair. {r1,r0} = 00 is the spacer
  // (precharge), 01 is '0', 10 is '1', 11 is forbidden.
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  // The six switches of one switch point, in configuration-bit order.
  localparam int unsigned SB_PAIRS = 6;
  function automatic side_e pair_side_a(int unsigned p);
    case (p)
      0: return SIDE_LEFT;  1: return SIDE_TOP;   2: return SIDE_LEFT;
      3: return SIDE_TOP;   4: return SIDE_RIGHT; default: return SIDE_BOTTOM;
    endcase
  endfunction
  function automatic side_e pair_side_b(int unsigned p);
    case (p)
      0: return SIDE_RIGHT; 1: return SIDE_BOTTOM; 2: return SIDE_TOP;
      3: return SIDE_RIGHT; 4: return SIDE_BOTTOM; default: return SIDE_LEFT;
    endcase
  endfunction

  // Number of switches per track of a box with the given sides present:
  // C(sides, 2) = 6, 3 or 1 for a full, 1/2 and 1/4 box.
  function automatic int unsigned sb_pairs_present(logic [3:0] sides);
    int unsigned n = 0;
    for (int unsigned p = 0; p < SB_PAIRS; p++)
      if (sides[pair_side_a(p)] && sides[pair_side_b(p)]) n++;
    return n;
  endfunction

  // Track index used by switch p of track i: on its first side (side_b = 0)
  // or on its second side (side_b = 1).
  function automatic int unsigned sb_idx(sb_style_e style, int unsigned p,
                                         int unsigned i, int unsigned w,
                                         bit side_b);
    int unsigned m = w - 1 - i;
    case (style)
      SB_SUBSET: begin
        // Switch point i joins t(0,i), t(2,i), t(1,W-1-i), t(3,W-1-i).
        side_e s = side_b ? pair_side_b(p) : pair_side_a(p);
        return (s == SIDE_LEFT || s == SIDE_RIGHT) ? i : m;
      end
      default: begin
        // Twist-on-turn set S: [t(0,i),t(2,i)], [t(1,i),t(3,i)],
        // [t(0,i),t(1,i)], [t(1,i),t(2,W-i-1)], [t(2,i),t(3,i)],
        // [t(3,i),t(0,W-i-1)]. Twist-always also twists straight pairs.
        if (!side_b) return i;
        case (p)
          0, 1:    return (style == SB_TWIST_ALWAYS) ? m : i;
          3, 5:    return m;
          default: return i;
        endcase
      end
    endcase
  endfunction

  // Sides present at switchbox grid point (x, y) of an (nx+1) x (ny+1) grid,
  // and the number of configuration bits of that box.
  function automatic logic [3:0] sb_sides(int unsigned x, int unsigned y,
                                          int unsigned nx, int unsigned ny);
    logic [3:0] s;
    s[SIDE_LEFT]   = (x > 0);
    s[SIDE_RIGHT]  = (x < nx);
    s[SIDE_BOTTOM] = (y > 0);
    s[SIDE_TOP]    = (y < ny);
    return s;
  endfunction

  function automatic int unsigned sb_bits(int unsigned x, int unsigned y,
                                          int unsigned nx, int unsigned ny,
                                          int unsigned w);
    return sb_pairs_present(sb_sides(x, y, nx, ny)) * w;
  endfunction

  // Offset of the switchbox at (x, y) inside the switchbox region,
  // boxes taken row by row (y outer, x inner).
  function automatic int unsigned sb_ofs(int unsigned x, int unsigned y,
                                         int unsigned nx, int unsigned ny,
                                         int unsigned w);
    int unsigned o = 0;
    for (int unsigned yy = 0; yy <= ny; yy++)
      for (int unsigned xx = 0; xx <= nx; xx++)
        if (yy < y || (yy == y && xx < x)) o += sb_bits(xx, yy, nx, ny, w);
    return o;
  endfunction

  function automatic int unsigned sb_total(int unsigned nx, int unsigned ny,
                                           int unsigned w);
    return sb_ofs(0, ny + 1, nx, ny, w);
  endfunction

  // Connection box sizes.
  function automatic int unsigned plb_cb_bits(int unsigned w);
    return (PLB_NI + PLB_NO) * w;                 // Fc = 1: 152
  endfunction
  function automatic int unsigned iob_cb_bits(int unsigned w);
    return (2 * IOB_NP) * (w / 2);                // Fc = 0.5: 24
  endfunction

  // Layout of the whole configuration chain, bit 0 being the stage next to
  // the chain input: PLBs, PLB connection boxes, IOB connection boxes, IOB
  // direction bits, switchboxes. IOBs are numbered bottom (x = 0..nx-1),
  // right (y), top (x), left (y).
  function automatic int unsigned n_iob(int unsigned nx, int unsigned ny);
    return 2 * (nx + ny);
  endfunction
  function automatic int unsigned ofs_plb(int unsigned k);
    return k * PLB_BITS;
  endfunction
  function automatic int unsigned ofs_plb_cb(int unsigned k, int unsigned nx,
                                             int unsigned ny, int unsigned w);
    return nx * ny * PLB_BITS + k * plb_cb_bits(w);
  endfunction
  function automatic int unsigned ofs_iob_cb(int unsigned k, int unsigned nx,
                                             int unsigned ny, int unsigned w);
    return nx * ny * (PLB_BITS + plb_cb_bits(w)) + k * iob_cb_bits(w);
  endfunction
  function automatic int unsigned ofs_iob(int unsigned k, int unsigned nx,
                                          int unsigned ny, int unsigned w);
    return nx * ny * (PLB_BITS + plb_cb_bits(w))
         + n_iob(nx, ny) * iob_cb_bits(w) + k * IOB_NP;
  endfunction
  function automatic int unsigned ofs_sb(int unsigned x, int unsigned y,
                                         int unsigned nx, int unsigned ny,
                                         int unsigned w);
    return ofs_iob(n_iob(nx, ny), nx, ny, w) + sb_ofs(x, y, nx, ny, w);
  endfunction
  function automatic int unsigned cfg_total(int unsigned nx, int unsigned ny,
                                            int unsigned w);
    return ofs_sb(0, 0, nx, ny, w) + sb_total(nx, ny, w);
  endfunction

endpackage
