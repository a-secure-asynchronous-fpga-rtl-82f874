// tb_safe_fpga: end-to-end test of the full-size 3x3 fabric.
//
// 1. Power-up: every register starts at a random value, so the
//    configuration chain holds random tokens, including forbidden 11 states.
//    INIT is held low with spacer inputs until the chain is empty.
// 2. Configuration: a bitstream is pushed through the 4-phase handshake,
//    counting acknowledges (one per configuration bit), and one further
//    token must be refused because the chain is full.
// 3. Operation: the bitstream maps a dual-rail 2-input gate on PLB (0,0)
//    (O1/O0 are the rails, O6 the acknowledge) with a random function f.
//    Its inputs come from five pads on the left edge, through two I/O blocks,
//    their connection boxes, switchbox (0,1) and the PLB connection box; its
//    outputs go through the PLB connection box, switchbox (1,0) and an I/O
//    block on the bottom edge to three pads. The testbench runs 4-phase
//    cycles and checks evaluation, hold and precharge at the pads, 3 steps
//    after the inputs change (one switchbox, one LUT, one switchbox).
// 4. Re-initialisation erases the configuration: pad outputs and enables
//    return to 0.
// Every mechanism (drain, acknowledge, full-chain stall, evaluate, hold,
// precharge, erase) is counted and must have happened.
module tb_safe_fpga;
  import safe_pkg::*;

  localparam int unsigned NX = NX_DEF, NY = NY_DEF, W = W_DEF;
  localparam int unsigned NCFG = cfg_total(NX, NY, W);
  localparam int unsigned NPAD = n_iob(NX, NY) * IOB_NP;
  localparam int unsigned LAT  = 3;

  // Pads used: IOB 10 (left, y=1) = pads 30..32, IOB 9 (left, y=0) = 27..29,
  // IOB 1 (bottom, x=1) = pads 3..5.
  localparam int P_SIN = 30, P_X1 = 31, P_X0 = 32, P_Y1 = 27, P_Y0 = 28;
  localparam int P_O0 = 3, P_O1 = 4, P_ACK = 5;

  logic            clk = 1'b0;
  logic            init, cfg_in0, cfg_in1, cfg_ack_out;
  logic [NPAD-1:0] pad_in, pad_out, pad_oe;
  logic [NCFG-1:0] bits;
  logic [3:0]      fn;
  int              checks = 0, failures = 0;
  int              acks = 0;
  int              n_drained = 0, n_stall = 0, n_eval = 0, n_hold = 0;
  int              n_pre = 0, n_erase = 0;

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

  task automatic push(input logic b, output logic taken);
    int t;
    {cfg_in1, cfg_in0} = b ? 2'b10 : 2'b01;
    t = 0;
    do begin @(negedge clk); t++; end while (cfg_ack_out && t < 40);
    taken = !cfg_ack_out;
    if (taken) acks++;
    {cfg_in1, cfg_in0} = 2'b00;
    if (taken) begin
      t = 0;
      do begin @(negedge clk); t++; end while (!cfg_ack_out && t < 40);
    end
  endtask

  // Next value of rail r of the gate (the paper's Eq. 1).
  function automatic logic rail(int r, logic self, logic s_in,
                                logic [1:0] xr, logic [1:0] yr);
    logic xv, yv;
    xv = (xr == 2'b10); yv = (yr == 2'b10);
    if (xr != 2'b00 && yr != 2'b00 && !s_in)
      return r ? fn[{xv, yv}] : !fn[{xv, yv}];
    if (xr == 2'b00 && yr == 2'b00 && s_in) return 1'b0;
    return self;
  endfunction

  task automatic build_bitstream();
    int o;
    bits = '0;
    // PLB (0,0): the dual-rail gate.
    o = ofs_plb(0);
    for (int a = 0; a < 64; a++) begin
      bits[o + 0*64 + a] = rail(0, a[0], a[1], a[3:2], a[5:4]);
      bits[o + 1*64 + a] = rail(1, a[1], a[0], a[3:2], a[5:4]);
    end
    bits[o + PLB_MUX_OFS + 0] = 1'b1;        // LUT0 input 0 <- O0
    bits[o + PLB_MUX_OFS + 4 + 1] = 1'b1;    // LUT1 input 1 <- O1
    bits[o + PLB_P_OFS + 0] = 1'b1;          // A (O0) -> P, O1 -> Q
    // Its connection box: I0,I1 <- h7 (S_in), I2 <- h6, I3 <- h5,
    // I4 <- h3, I5 <- h2; O0 -> v7, O1 -> v6, O6 -> v5.
    o = ofs_plb_cb(0, NX, NY, W);
    bits[o + 0*W + 7] = 1'b1;
    bits[o + 1*W + 7] = 1'b1;
    bits[o + 2*W + 6] = 1'b1;
    bits[o + 3*W + 5] = 1'b1;
    bits[o + 4*W + 3] = 1'b1;
    bits[o + 5*W + 2] = 1'b1;
    bits[o + (12+0)*W + 7] = 1'b1;
    bits[o + (12+1)*W + 6] = 1'b1;
    bits[o + (12+6)*W + 5] = 1'b1;
    // Switchbox (0,1), sides top/right/bottom: pairs [1,3],[1,2],[2,3].
    // Subset switch point i joins top track 7-i with right track i.
    o = ofs_sb(0, 1, NX, NY, W);
    for (int i = 5; i <= 7; i++) bits[o + i*3 + 1] = 1'b1;   // top -> right
    for (int i = 2; i <= 3; i++) bits[o + i*3 + 2] = 1'b1;   // bottom -> right
    // Switchbox (1,0), sides left/top/right: pairs [0,2],[0,1],[1,2].
    o = ofs_sb(1, 0, NX, NY, W);
    for (int i = 0; i <= 2; i++) bits[o + i*3 + 2] = 1'b1;   // top -> right
    // IOB 10: pads 0,1,2 drive wires 0,1,2 of v[0][1].
    o = ofs_iob_cb(10, NX, NY, W);
    bits[o + (3+0)*4 + 0] = 1'b1;
    bits[o + (3+1)*4 + 0] = 1'b1;
    bits[o + (3+2)*4 + 1] = 1'b1;
    // IOB 9: pads 0,1 drive wires 4,5 of v[0][0].
    o = ofs_iob_cb(9, NX, NY, W);
    bits[o + (3+0)*4 + 2] = 1'b1;
    bits[o + (3+1)*4 + 2] = 1'b1;
    // IOB 1: pads 0,1,2 read wires 0,1,2 of h[1][0]; all three outputs.
    o = ofs_iob_cb(1, NX, NY, W);
    bits[o + 0*4 + 0] = 1'b1;
    bits[o + 1*4 + 0] = 1'b1;
    bits[o + 2*4 + 1] = 1'b1;
    bits[ofs_iob(1, NX, NY, W) +: 3] = 3'b111;
  endtask

  function automatic logic [1:0] dr(logic v);
    return v ? 2'b10 : 2'b01;
  endfunction

  task automatic set_inputs(logic s_in, logic [1:0] xr, logic [1:0] yr);
    pad_in[P_SIN] = s_in;
    {pad_in[P_X1], pad_in[P_X0]} = xr;
    {pad_in[P_Y1], pad_in[P_Y0]} = yr;
    repeat (LAT) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic taken, xv, yv;
    int   t0;
    fn = 4'($urandom);
    build_bitstream();
    pad_in = '0;

    // 1. Initialisation from the random power-up state.
    init = 1'b0;
    {cfg_in1, cfg_in0} = 2'b00;
    @(negedge clk);
    n_drained = $countones(dut.u_chain.u_stages.m0 | dut.u_chain.u_stages.m1 |
                           dut.u_chain.u_stages.s0 | dut.u_chain.u_stages.s1);
    repeat (12 * NCFG) @(negedge clk);
    check("chain empty after INIT",
          dut.u_chain.u_stages.m0 == '0 && dut.u_chain.u_stages.m1 == '0 &&
          dut.u_chain.u_stages.s0 == '0 && dut.u_chain.u_stages.s1 == '0 &&
          cfg_ack_out);
    check("pads disabled after INIT", pad_oe == '0);
    $display("INIT cleared %0d occupied half stages of %0d", n_drained, NCFG);

    // 2. Configuration.
    init = 1'b1;
    @(negedge clk);
    t0 = int'($time / 10);
    for (int k = NCFG - 1; k >= 0; k--) push(bits[k], taken);
    $display("configured %0d bits in %0d steps, %0d acknowledges", NCFG,
             int'($time / 10) - t0, acks);
    check("one acknowledge per configuration bit", acks == NCFG);
    repeat (4 * NCFG) @(negedge clk);
    check("configuration stored", dut.cfg == bits);
    push(1'b0, taken);
    check("full chain refuses a further token", !taken);
    if (!taken) n_stall++;
    check("configuration kept", dut.cfg == bits);
    check("output pads enabled", pad_oe == NPAD'(64'h38));

    // 3. Operation of the mapped gate.
    set_inputs(1'b1, 2'b00, 2'b00);
    check("precharged", pad_out[P_O1] == 0 && pad_out[P_O0] == 0);
    for (int n = 0; n < 200; n++) begin
      xv = 1'($urandom); yv = 1'($urandom);
      set_inputs(1'b1, dr(xv), dr(yv));
      check("hold: valid inputs, acknowledge high",
            {pad_out[P_O1], pad_out[P_O0]} == 2'b00);
      n_hold++;
      set_inputs(1'b0, dr(xv), dr(yv));
      check("evaluate", {pad_out[P_O1], pad_out[P_O0]} ==
                        {fn[{xv, yv}], !fn[{xv, yv}]} && pad_out[P_ACK]);
      n_eval++;
      set_inputs(1'b0, 2'b00, 2'b00);
      check("hold: spacer inputs, acknowledge low",
            {pad_out[P_O1], pad_out[P_O0]} == {fn[{xv, yv}], !fn[{xv, yv}]});
      n_hold++;
      set_inputs(1'b1, 2'b00, 2'b00);
      check("precharge", {pad_out[P_O1], pad_out[P_O0]} == 2'b00 &&
                         !pad_out[P_ACK]);
      n_pre++;
    end
    // Latency: outputs must not have changed one step before LAT.
    pad_in[P_SIN] = 1'b0;
    {pad_in[P_X1], pad_in[P_X0]} = 2'b10;
    {pad_in[P_Y1], pad_in[P_Y0]} = 2'b10;
    repeat (LAT - 1) @(negedge clk);
    check("latency: not yet at LAT-1 steps", !pad_out[P_ACK]);
    @(negedge clk);
    check("latency: valid at LAT steps", pad_out[P_ACK]);

    // 4. Erase by INIT.
    init = 1'b0;
    {cfg_in1, cfg_in0} = 2'b00;
    repeat (12 * NCFG) @(negedge clk);
    check("configuration erased", dut.cfg == '0 && pad_oe == '0);
    if (dut.cfg == '0) n_erase++;

    check("mechanism: INIT drained half stages", n_drained > 0);
    check("mechanism: acknowledges", acks > 0);
    check("mechanism: full-chain stall", n_stall > 0);
    check("mechanism: evaluate", n_eval > 0);
    check("mechanism: hold", n_hold > 0);
    check("mechanism: precharge", n_pre > 0);
    check("mechanism: erase", n_erase > 0);
    $display("drained=%0d acks=%0d stall=%0d eval=%0d hold=%0d pre=%0d erase=%0d",
             n_drained, acks, n_stall, n_eval, n_hold, n_pre, n_erase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
