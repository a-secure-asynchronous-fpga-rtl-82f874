// config_chain: the asynchronous configuration chain of the fabric.
//
// N full-buffer stages in series, terminated by the initialisation cap. A
// tester resets it by holding init = 0 and the inputs at 00 until every
// stage is empty, then raises init and pushes the bitstream as 1-out-of-2,
// 4-phase tokens: drive one rail high, wait for cfg_ack_out to fall, return
// both rails to 0, wait for cfg_ack_out to rise. The first token pushed ends
// in stage N-1 (next to the cap), the last one in stage 0. Once all N stages
// hold a token cfg_ack_out stays high and the next token is never taken:
// the chain is full. cfg_bits[k] is rail 1 of stage k, the bit that drives
// the switch or memory point attached to that stage.
//
// The chain structure follows the paper; the bit count N defaults to the
// number of configuration bits of the fabric built here (safe_pkg), and the
// clk input is the one-gate-delay step of the C-element model.
//
// Timing: an empty chain takes one token every 4 clk steps at its input; a
// token needs 2 steps per stage to reach the end of an empty chain.
module config_chain
  import safe_pkg::*;
#(
  parameter int unsigned N = cfg_total(NX_DEF, NY_DEF, W_DEF)
) (
  input  logic         clk,
  input  logic         init,
  input  logic         cfg_in0,
  input  logic         cfg_in1,
  output logic         cfg_ack_out,
  output logic [N-1:0] cfg_bits
);
  logic [N-1:0] s0, s1;     // second-half rails of every stage
  logic         ack_end;    // acknowledge from the cap into stage N-1

  full_buffer_stage #(.N(N)) u_stages (
    .clk, .e0(cfg_in0), .e1(cfg_in1), .e_ack(cfg_ack_out),
    .s0, .s1, .s_ack(ack_end)
  );

  config_init_cap u_cap (
    .init, .out0(s0[N-1]), .out1(s1[N-1]), .ack_in(ack_end)
  );

  assign cfg_bits = s1;
endmodule
