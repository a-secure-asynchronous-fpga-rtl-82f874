// safe_fpga: the SAFE asynchronous FPGA, a 3x3 array in its prototype size.
//
// The fabric is meant for dual-rail (and other 1-out-of-n) asynchronous
// logic whose power and electromagnetic signature must not depend on data.
// It contains NX x NY programmable logic blocks (plb) on a mesh of routing
// channels W tracks wide, an (NX+1) x (NY+1) grid of switchboxes (full
// boxes inside, 1/2 boxes on the edges, 1/4 boxes in the corners), one
// connection box per PLB (12 inputs read from the horizontal channel above
// the PLB, 7 outputs drive the vertical channel on its right) and
// 2*(NX+NY) I/O blocks of three pads, each with a half-populated connection
// box onto the peripheral channel next to it. Every configuration bit of
// all these parts is one stage of a single asynchronous configuration chain
// (config_chain), loaded through a 1-out-of-2, 4-phase handshake on
// cfg_in0/cfg_in1/cfg_ack_out after an INIT phase.
//
// Channel model: a channel segment joins two switchboxes and may also be
// driven by connection-box output pins. Each end of the segment sees the
// value driven by the other end and by the pins, not its own, so a closed
// bidirectional switch does not send a signal back where it came from.
// Blocks that read a segment see the OR of everything driving it.
//
// Numbering: segment h[x][y] runs from switchbox (x,y) to (x+1,y), v[x][y]
// from (x,y) to (x,y+1). I/O block k is on the bottom for k < NX (channel
// h[k][0]), on the right for k < NX+NY (v[NX][k-NX]), on the top for
// k < 2NX+NY (h[k-NX-NY][NY]), otherwise on the left (v[0][...]); its pads
// are pad_*[3k+2:3k]. The configuration bit layout is given in safe_pkg.
//
// What follows the paper: the array and channel size, the PLB, the
// switchbox and connection-box types, their switch counts and the
// configuration chain. Own choices: the pin-to-channel sides, the wire
// choice at Fc = 0.5, the I/O bit meaning, the configuration bit order and
// the clk input, which is not a clock of the circuit but the unit step of
// the gate-delay model used by its state-holding gates (C-elements, LUT
// outputs, block P memory elements, switchbox buffers).
module safe_fpga
  import safe_pkg::*;
#(
  parameter int unsigned NX    = NX_DEF,
  parameter int unsigned NY    = NY_DEF,
  parameter int unsigned W     = W_DEF,
  parameter sb_style_e   STYLE = SB_SUBSET,
  localparam int unsigned NIOB = n_iob(NX, NY),
  localparam int unsigned NPAD = NIOB * IOB_NP,
  localparam int unsigned NCFG = cfg_total(NX, NY, W)
) (
  input  logic            clk,
  input  logic            init,
  input  logic            cfg_in0,
  input  logic            cfg_in1,
  output logic            cfg_ack_out,
  input  logic [NPAD-1:0] pad_in,
  output logic [NPAD-1:0] pad_out,
  output logic [NPAD-1:0] pad_oe
);
  logic [NCFG-1:0] cfg;

  config_chain #(.N(NCFG)) u_chain (
    .clk, .init, .cfg_in0, .cfg_in1, .cfg_ack_out, .cfg_bits(cfg)
  );

  // Segment drivers: from the switchbox at either end and from pins.
  logic [W-1:0] h_dl [NX][NY+1];  // from switchbox (x,y), its right side
  logic [W-1:0] h_dr [NX][NY+1];  // from switchbox (x+1,y), its left side
  logic [W-1:0] h_dc [NX][NY+1];  // from connection-box output pins
  logic [W-1:0] v_db [NX+1][NY];  // from switchbox (x,y), its top side
  logic [W-1:0] v_dt [NX+1][NY];  // from switchbox (x,y+1), its bottom side
  logic [W-1:0] v_dc [NX+1][NY];  // from connection-box output pins

  logic [W-1:0] plb_drv [NX][NY];
  logic [W-1:0] iob_drv [NIOB];
  logic [W-1:0] iob_chan[NIOB];

  // ---------------------------------------------------------------- switchboxes
  for (genvar x = 0; x <= NX; x++) begin : g_sbx
    for (genvar y = 0; y <= NY; y++) begin : g_sby
      localparam logic [3:0] SIDES = sb_sides(x, y, NX, NY);
      localparam int unsigned OFS  = ofs_sb(x, y, NX, NY, W);
      localparam int unsigned NB   = sb_bits(x, y, NX, NY, W);
      logic [3:0][W-1:0] t_in, t_out;

      if (x > 0) begin : g_il
        assign t_in[SIDE_LEFT] = h_dl[x-1][y] | h_dc[x-1][y];
      end else begin : g_nl
        assign t_in[SIDE_LEFT] = '0;
      end
      if (x < NX) begin : g_ir
        assign t_in[SIDE_RIGHT] = h_dr[x][y] | h_dc[x][y];
      end else begin : g_nr
        assign t_in[SIDE_RIGHT] = '0;
      end
      if (y > 0) begin : g_ib
        assign t_in[SIDE_BOTTOM] = v_db[x][y-1] | v_dc[x][y-1];
      end else begin : g_nb
        assign t_in[SIDE_BOTTOM] = '0;
      end
      if (y < NY) begin : g_it
        assign t_in[SIDE_TOP] = v_dt[x][y] | v_dc[x][y];
      end else begin : g_nt
        assign t_in[SIDE_TOP] = '0;
      end

      switchbox #(.W(W), .STYLE(STYLE), .SIDES(SIDES)) u_sb (
        .clk, .cfg(cfg[OFS +: NB]), .t_in, .t_out
      );

      if (x > 0)  begin : g_l assign h_dr[x-1][y] = t_out[SIDE_LEFT];   end
      if (x < NX) begin : g_r assign h_dl[x][y]   = t_out[SIDE_RIGHT];  end
      if (y > 0)  begin : g_b assign v_dt[x][y-1] = t_out[SIDE_BOTTOM]; end
      if (y < NY) begin : g_t assign v_db[x][y]   = t_out[SIDE_TOP];    end
    end
  end

  // ------------------------------------------------------------------- PLBs
  for (genvar x = 0; x < NX; x++) begin : g_plbx
    for (genvar y = 0; y < NY; y++) begin : g_plby
      localparam int unsigned K = y * NX + x;
      logic [PLB_NI-1:0] pin_in;
      logic [PLB_NO-1:0] o;
      logic [W-1:0]      chan;

      assign chan = h_dl[x][y+1] | h_dr[x][y+1] | h_dc[x][y+1];

      conn_box #(.W(W), .NI(PLB_NI), .NO(PLB_NO), .HALF(1'b0)) u_cb (
        .cfg(cfg[ofs_plb_cb(K, NX, NY, W) +: plb_cb_bits(W)]),
        .chan_in(chan), .pin_in, .pin_out(o), .chan_drv(plb_drv[x][y])
      );

      plb u_plb (
        .clk, .i_in(pin_in[5:0]), .j_in(pin_in[11:6]),
        .cfg(cfg[ofs_plb(K) +: PLB_BITS]), .o
      );
    end
  end

  // -------------------------------------------------------------- I/O blocks
  for (genvar k = 0; k < NIOB; k++) begin : g_iob
    logic [IOB_NP-1:0] from_fabric, to_fabric;

    conn_box #(.W(W), .NI(IOB_NP), .NO(IOB_NP), .HALF(1'b1)) u_cb (
      .cfg(cfg[ofs_iob_cb(k, NX, NY, W) +: iob_cb_bits(W)]),
      .chan_in(iob_chan[k]), .pin_in(from_fabric), .pin_out(to_fabric),
      .chan_drv(iob_drv[k])
    );

    iob #(.NP(IOB_NP)) u_iob (
      .cfg(cfg[ofs_iob(k, NX, NY, W) +: IOB_NP]),
      .pad_in(pad_in[IOB_NP*k +: IOB_NP]),
      .pad_out(pad_out[IOB_NP*k +: IOB_NP]),
      .pad_oe(pad_oe[IOB_NP*k +: IOB_NP]),
      .from_fabric, .to_fabric
    );
  end

  // ------------------------------------------------ pin drivers per segment
  for (genvar x = 0; x < NX; x++) begin : g_hc
    for (genvar y = 0; y <= NY; y++) begin : g_hcy
      if (y == 0) begin : g_bot
        assign h_dc[x][y]   = iob_drv[x];
        assign iob_chan[x]  = h_dl[x][y] | h_dr[x][y] | h_dc[x][y];
      end else if (y == NY) begin : g_top
        assign h_dc[x][y]   = iob_drv[NX+NY+x];
        assign iob_chan[NX+NY+x] = h_dl[x][y] | h_dr[x][y] | h_dc[x][y];
      end else begin : g_mid
        assign h_dc[x][y]   = '0;
      end
    end
  end

  for (genvar x = 0; x <= NX; x++) begin : g_vc
    for (genvar y = 0; y < NY; y++) begin : g_vcy
      if (x == 0) begin : g_left
        assign v_dc[x][y] = iob_drv[2*NX+NY+y];
        assign iob_chan[2*NX+NY+y] = v_db[x][y] | v_dt[x][y] | v_dc[x][y];
      end else if (x == NX) begin : g_right
        assign v_dc[x][y] = iob_drv[NX+y] | plb_drv[x-1][y];
        assign iob_chan[NX+y] = v_db[x][y] | v_dt[x][y] | v_dc[x][y];
      end else begin : g_mid
        assign v_dc[x][y] = plb_drv[x-1][y];
      end
    end
  end
endmodule
