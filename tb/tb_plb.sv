// tb_plb: a dual-rail 4-phase gate mapped on one PLB, as the paper maps a
// 1-out-of-2, 2-input gate:
//   O0 = LUT6(O0, S_in, x1, x0, y1, y0),  O1 = LUT6(S_in, O1, x1, x0, y1, y0)
// with I0 = I1 = S_in, I2 = x1, I3 = x0, I4 = y1, I5 = y0, LUT0 input 0 and
// LUT1 input 1 taken from the feedback. Block P copies O0 to P and O1 to Q so
// that O6 = O0 xor O1 is the gate's acknowledge. The function f is random per
// run. The testbench drives full 4-phase cycles and checks evaluation (valid
// inputs, S_in = 0: O = f), hold (spacer inputs, S_in = 0; and valid inputs,
// S_in = 1: O unchanged) and precharge (spacer inputs, S_in = 1: O = 00),
// each one step after the inputs change.
// The lower LUTs build a C-element on J0, J1 through block P's memory
// element on C, D (LUT2 = J0&J1, LUT3 = J0|J1), checked on O5.
module tb_plb;
  import safe_pkg::*;

  logic                clk = 1'b0;
  logic [5:0]          i_in, j_in;
  logic [PLB_BITS-1:0] cfg;
  logic [6:0]          o;
  logic [3:0]          fn;   // truth table of f(x, y), index {x, y}
  int                  checks = 0, failures = 0;
  int                  n_eval = 0, n_hold = 0, n_pre = 0;

  always #5 clk = ~clk;

  plb dut (.clk, .i_in, .j_in, .cfg, .o);

  // Expected next value of rail r (Eq. 1), given the LUT's address fields.
  function automatic logic rail(int r, logic self, logic s_in,
                                logic [1:0] xr, logic [1:0] yr);
    logic xv, yv;
    xv = (xr == 2'b10); yv = (yr == 2'b10);
    if (xr != 2'b00 && yr != 2'b00 && !s_in)
      return r ? fn[{xv, yv}] : !fn[{xv, yv}];
    if (xr == 2'b00 && yr == 2'b00 && s_in) return 1'b0;
    return self;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("%0t: failed: %s (i=%b o=%b)", $time, what, i_in, o);
    end
  endtask

  function automatic logic [1:0] dr(logic v);
    return v ? 2'b10 : 2'b01;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic xv, yv, cst;
    fn  = 4'($urandom);
    cfg = '0;
    for (int a = 0; a < 64; a++) begin
      // Address bit k = LUT input k.
      cfg[0*64 + a] = rail(0, a[0], a[1], a[3:2], a[5:4]);
      cfg[1*64 + a] = rail(1, a[1], a[0], a[3:2], a[5:4]);
      cfg[2*64 + a] = a[0] & a[1];
      cfg[3*64 + a] = a[0] | a[1];
    end
    cfg[PLB_MUX_OFS + 0*4 + 0] = 1'b1;     // LUT0 input 0 <- O0
    cfg[PLB_MUX_OFS + 1*4 + 1] = 1'b1;     // LUT1 input 1 <- O1
    cfg[PLB_P_OFS +: 6] = 6'b100001;        // A -> P, B,C,D -> Q; Q memory
    // Precharge from the random power-up state.
    i_in = 6'b000011;   // spacers, S_in = 1
    j_in = '0;
    repeat (3) @(negedge clk);
    check("precharged", o[1:0] == 2'b00);
    for (int n = 0; n < 300; n++) begin
      xv = 1'($urandom); yv = 1'($urandom);
      // Valid inputs with S_in still 1: hold at 00.
      i_in = {dr(yv), dr(xv), 2'b11};
      @(negedge clk);
      check("hold while acknowledge high", o[1:0] == 2'b00); n_hold++;
      // Evaluate.
      i_in[1:0] = 2'b00;
      @(negedge clk);
      check("evaluate", o[1:0] == {fn[{xv, yv}], !fn[{xv, yv}]}); n_eval++;
      check("acknowledge out", o[6] == 1'b1);
      // Spacer inputs, S_in = 0: hold.
      i_in[5:2] = '0;
      @(negedge clk);
      check("hold with spacer inputs", o[1:0] == {fn[{xv, yv}], !fn[{xv, yv}]});
      n_hold++;
      // Precharge.
      i_in[1:0] = 2'b11;
      @(negedge clk);
      check("precharge", o[1:0] == 2'b00 && o[6] == 1'b0); n_pre++;
    end
    // C-element on J0, J1 (latency: LUT step + memory step).
    j_in = '0;
    repeat (3) @(negedge clk);
    cst = 1'b0;
    for (int n = 0; n < 300; n++) begin
      j_in[1:0] = 2'($urandom);
      if (j_in[0] == j_in[1]) cst = j_in[0];
      repeat (2) @(negedge clk);
      check("C-element through block P", o[5] == cst);
    end
    check("all phases seen", n_eval > 0 && n_hold > 0 && n_pre > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
