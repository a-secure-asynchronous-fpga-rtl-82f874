// full_buffer_stage: N stages of the asynchronous configuration chain in
// series (N = 1 gives the single stage of the paper's schematic).
//
// A stage passes 1-out-of-2, 4-phase tokens: (e1,e0) = 01 means '0', 10
// means '1', 00 is the spacer. It is two weak-conditioned half buffers in
// series, each a pair of C-elements (one per rail) enabled by the completion
// of the next half: en = NOR of the next half's two rails. The acknowledge
// a stage sends back is the NOR of its first half's rails, so 1 means
// "empty, ready" and 0 means "holding a token". When the chain is full every
// stage holds its token on its second half, so s1[k] is the configuration
// bit stored in stage k (the prototype connects its switches to rail 1
// only). Stage 0 is the one at the input.
//
// The stage structure (two columns of C-elements, two NOR completion gates,
// ports E0/E1/E_ack and S0/S1/S_ack) follows the paper's chain schematic.
// The stages are written bit-parallel, bit k of each vector being stage k,
// so that a chain of thousands of stages stays small for the simulator; the
// logic is the same as N separate stages. The one-step delay of each
// C-element is this design's timing model.
//
// Interface: e0/e1 in and e_ack out towards the chain input; s0/s1 (one bit
// per stage; bit N-1 drives the next block) and s_ack in towards the chain
// end. A token entering an empty stage appears on its s rails two clk steps
// later if the stage after it is ready.
module full_buffer_stage #(
  parameter int unsigned N = 1
) (
  input  logic         clk,
  input  logic         e0,
  input  logic         e1,
  output logic         e_ack,
  output logic [N-1:0] s0,
  output logic [N-1:0] s1,
  input  logic         s_ack
);
  logic [N-1:0] m0, m1;     // first half of each stage
  logic [N-1:0] in0, in1;   // rails into each stage
  logic [N-1:0] en1;        // completion of each second half
  logic [N:0]   ack;        // acknowledge into each stage's input side

  if (N > 1) begin : g_link
    assign in0 = {s0[N-2:0], e0};
    assign in1 = {s1[N-2:0], e1};
  end else begin : g_one
    assign in0 = e0;
    assign in1 = e1;
  end

  assign en1      = ~(s0 | s1);
  assign ack[N-1:0] = ~(m0 | m1);
  assign ack[N]   = s_ack;
  assign e_ack    = ack[0];

  c_element #(.WIDTH(N)) u_c0a (.clk, .a(in0), .b(en1),      .y(m0));
  c_element #(.WIDTH(N)) u_c1a (.clk, .a(in1), .b(en1),      .y(m1));
  c_element #(.WIDTH(N)) u_c0b (.clk, .a(m0),  .b(ack[N:1]), .y(s0));
  c_element #(.WIDTH(N)) u_c1b (.clk, .a(m1),  .b(ack[N:1]), .y(s1));
endmodule
