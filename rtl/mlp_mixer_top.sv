// mlp_mixer_top: fully unrolled, pipelined MLP-Mixer jet tagger.
//
// A jet is presented as the NP highest-pT particles, ordered by pT and zero
// padded, each with NF kinematic features, all in parallel. The network is
//   input quantizer -> MLP1 (per particle) -> MLP2 (per feature, across particles)
//   -> + skip from the quantized input -> MLP3 (per particle)
//   -> MLP4 (per feature, particles -> 1) -> head -> NC class scores.
// Every multiplication is by a constant and is done with shift-and-add logic;
// every layer has its own hardware, so a new jet can enter on every clock cycle
// (initiation interval 1) and nothing ever stalls.
//
// Interface: x[p][f] with i_valid in; scores[c] with o_valid out, c = g, q, W, Z, t.
// There is no back-pressure: o_valid is i_valid delayed by LATENCY cycles.
// Timing: LATENCY = 14 cycles: input register, input quantizer, MLP1 (2),
// MLP2 (1), skip add (1), MLP3 (2), MLP4 (1), head (4), output register. The
// stage split and the two I/O registers are this design's choice, made so the
// total equals the 14 cycles reported for the 64-particle model at 200 MHz.
// rst clears the valid pipeline only.
module mlp_mixer_top
  import mixer_pkg::*;
#(
  parameter int NP = NP_DEF,
  parameter int NF = NF_DEF,
  parameter int NH = NH_DEF,
  parameter int NC = NC_DEF
) (
  input  logic clk,
  input  logic rst,
  input  logic i_valid,
  input  act_t x      [NP][NF],
  output logic o_valid,
  output act_t scores [NC]
);

  act_t x_r  [NP][NF];   // input register
  act_t xq   [NP][NF];   // quantized input
  act_t xq_d [NP][NF];   // quantized input, aligned with MLP2 output
  act_t m1   [NP][NF];
  act_t m2   [NP][NF];
  act_t sk   [NP][NF];
  act_t m3   [NP][NF];
  act_t pool [NF];
  act_t logit[NC];
  logic v_in, v_q, v_m1, v_m2, v_sk, v_m3, v_pool, v_head;

  always_ff @(posedge clk) x_r <= x;

  always_ff @(posedge clk)
    if (rst) v_in <= 1'b0;
    else     v_in <= i_valid;

  input_quant #(.NP(NP), .NF(NF)) u_input_quant (
    .clk, .rst, .i_valid(v_in), .x(x_r), .o_valid(v_q), .q(xq));

  feature_mlp #(.NP(NP), .NF(NF), .NH(NH), .LA(L_M1A), .LB(L_M1B)) u_mlp1 (
    .clk, .rst, .i_valid(v_q), .x(xq), .o_valid(v_m1), .y(m1));

  token_mlp #(.NP(NP), .NF(NF)) u_mlp2 (
    .clk, .rst, .i_valid(v_m1), .x(m1), .o_valid(v_m2), .y(m2));

  tensor_delay #(.NP(NP), .NF(NF), .D(3)) u_skip_delay (.clk, .x(xq), .y(xq_d));

  skip_add #(.NP(NP), .NF(NF)) u_skip (
    .clk, .rst, .i_valid(v_m2), .a(xq_d), .b(m2), .o_valid(v_sk), .y(sk));

  feature_mlp #(.NP(NP), .NF(NF), .NH(NH), .LA(L_M3A), .LB(L_M3B)) u_mlp3 (
    .clk, .rst, .i_valid(v_sk), .x(sk), .o_valid(v_m3), .y(m3));

  token_pool #(.NP(NP), .NF(NF)) u_mlp4 (
    .clk, .rst, .i_valid(v_m3), .x(m3), .o_valid(v_pool), .y(pool));

  mlp_head #(.NF(NF), .NH(NH), .NC(NC)) u_head (
    .clk, .rst, .i_valid(v_pool), .x(pool), .o_valid(v_head), .y(logit));

  always_ff @(posedge clk) scores <= logit;

  always_ff @(posedge clk)
    if (rst) o_valid <= 1'b0;
    else     o_valid <= v_head;

  // Fixed latency, no stalls: every accepted jet leaves exactly LATENCY cycles later.
  a_latency: assert property (@(posedge clk) disable iff (rst)
                              i_valid |-> ##LATENCY o_valid);

endmodule
