// mlp_head: the classification head.
//
// Four fused DenseBn layers, NF->NH, NH->NH, NH->NH with ReLU after each, then
// NH->NC without ReLU. The last layer's outputs are the class scores (logits) for
// gluon, light quark, W, Z and top jets; no softmax is applied, since choosing the
// largest score does not need one.
//
// Interface: x is the NF-vector from MLP4, y the NC scores, both act_t.
// Timing: four register stages, one per layer, one jet per cycle.
module mlp_head
  import mixer_pkg::*;
#(
  parameter int NF = NF_DEF,
  parameter int NH = NH_DEF,
  parameter int NC = NC_DEF
) (
  input  logic clk,
  input  logic rst,
  input  logic i_valid,
  input  act_t x [NF],
  output logic o_valid,
  output act_t y [NC]
);

  act_t h0 [NH], h1 [NH], h2 [NH];
  acc_t a0 [NH], a1 [NH], a2 [NH], a3 [NC];
  act_t q0 [NH], q1 [NH], q2 [NH], q3 [NC];
  logic [3:0] v;

  dense_bn  #(.IN(NF), .OUT(NH), .LAYER(L_H0)) u_d0 (.x(x),  .y(a0));
  act_quant #(.N(NH), .LAYER(L_H0), .RELU(1'b1)) u_q0 (.a(a0), .q(q0));
  dense_bn  #(.IN(NH), .OUT(NH), .LAYER(L_H1)) u_d1 (.x(h0), .y(a1));
  act_quant #(.N(NH), .LAYER(L_H1), .RELU(1'b1)) u_q1 (.a(a1), .q(q1));
  dense_bn  #(.IN(NH), .OUT(NH), .LAYER(L_H2)) u_d2 (.x(h1), .y(a2));
  act_quant #(.N(NH), .LAYER(L_H2), .RELU(1'b1)) u_q2 (.a(a2), .q(q2));
  dense_bn  #(.IN(NH), .OUT(NC), .LAYER(L_H3)) u_d3 (.x(h2), .y(a3));
  act_quant #(.N(NC), .LAYER(L_H3), .RELU(1'b0)) u_q3 (.a(a3), .q(q3));

  always_ff @(posedge clk) begin
    h0 <= q0;
    h1 <= q1;
    h2 <= q2;
    y  <= q3;
  end

  always_ff @(posedge clk)
    if (rst) v <= '0;
    else     v <= {v[2:0], i_valid};

  assign o_valid = v[3];

endmodule
