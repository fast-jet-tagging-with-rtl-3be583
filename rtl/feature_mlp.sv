// feature_mlp: the feature-mixing MLP (MLP1, and MLP3 with other constants).
//
// For every particle independently it computes
//   y = ReLU(DenseBn_B(ReLU(DenseBn_A(x))))
// with DenseBn_A mapping the NF features to NH hidden units and DenseBn_B mapping
// back to NF. All particles share the same two kernels (one set of constants), but
// each particle has its own copy of the arithmetic, so all NP particles are
// processed in the same cycle. Activation formats may differ per particle.
//
// Interface: x, y are NP x NF tensors of act_t; LA, LB select the constants of the
// two layers (L_M1A/L_M1B for MLP1, L_M3A/L_M3B for MLP3).
// Timing: two register stages (after each DenseBn+ReLU), one jet per cycle.
module feature_mlp
  import mixer_pkg::*;
#(
  parameter int     NP = NP_DEF,
  parameter int     NF = NF_DEF,
  parameter int     NH = NH_DEF,
  parameter layer_e LA = L_M1A,
  parameter layer_e LB = L_M1B
) (
  input  logic clk,
  input  logic rst,
  input  logic i_valid,
  input  act_t x [NP][NF],
  output logic o_valid,
  output act_t y [NP][NF]
);

  act_t h [NP][NH];   // hidden layer, registered
  logic h_valid;

  for (genvar p = 0; p < NP; p++) begin : g_p
    acc_t h_acc [NH];
    act_t h_q   [NH];
    acc_t o_acc [NF];
    act_t o_q   [NF];

    dense_bn #(.IN(NF), .OUT(NH), .LAYER(LA)) u_dense_a (.x(x[p]), .y(h_acc));
    act_quant #(.N(NH), .LAYER(LA), .ROW(p), .RELU(1'b1), .FRAC_IN(DENSE_FRAC), .NPART(NP))
      u_act_a (.a(h_acc), .q(h_q));
    always_ff @(posedge clk) h[p] <= h_q;

    dense_bn #(.IN(NH), .OUT(NF), .LAYER(LB)) u_dense_b (.x(h[p]), .y(o_acc));
    act_quant #(.N(NF), .LAYER(LB), .ROW(p), .RELU(1'b1), .FRAC_IN(DENSE_FRAC), .NPART(NP))
      u_act_b (.a(o_acc), .q(o_q));
    always_ff @(posedge clk) y[p] <= o_q;
  end

  always_ff @(posedge clk)
    if (rst) begin
      h_valid <= 1'b0;
      o_valid <= 1'b0;
    end else begin
      h_valid <= i_valid;
      o_valid <= h_valid;
    end

endmodule
