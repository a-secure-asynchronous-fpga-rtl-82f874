// block_p: output block P of the PLB.
//
// Inputs A, B, C, D are the four LUT outputs of the PLB. Each passes an X
// block that routes it towards output P or output Q (cfg[0..3] for A..D,
// 1 = towards P). The inputs routed to P are XOR-combined into p_comb and the
// others into q_comb. Each output can instead come from a memory element:
// for P a multiplexer on A and B whose output selects its own input
// (m <= m ? B : A), for Q the same on C and D. With A = x&y and B = x|y
// this element is a C-element, which is how LUT pairs build state-holding
// asynchronous gates. cfg[4] (P) and cfg[5] (Q) pick the memory element when
// 1, the XOR combination when 0.
//
// The X blocks, the two multi-input gates, the self-selecting multiplexers
// and the two programmed output multiplexers follow the paper's drawing of
// block P. The XOR type of the combining gates, the data order of the
// feedback multiplexers and the polarity of the output selects are this
// design's readings. The memory elements have a one clk step delay (the
// gate-delay model); the combinational path has none.
//
// Interface: a..d in, cfg[5:0], p and q out.
module block_p (
  input  logic       clk,
  input  logic       a,
  input  logic       b,
  input  logic       c,
  input  logic       d,
  input  logic [5:0] cfg,
  output logic       p,
  output logic       q
);
  logic [3:0] din, u, v;
  logic       p_comb, q_comb, p_mem, q_mem;

  assign din = {d, c, b, a};

  for (genvar k = 0; k < 4; k++) begin : g_x
    block_x u_x (.d(din[k]), .c(cfg[k]), .u(u[k]), .v(v[k]));
  end

  assign p_comb = ^u;
  assign q_comb = ^v;

  always_ff @(posedge clk) begin
    p_mem <= p_mem ? b : a;
    q_mem <= q_mem ? d : c;
  end

  assign p = cfg[4] ? p_mem : p_comb;
  assign q = cfg[5] ? q_mem : q_comb;
endmodule
