// token_mlp: the particle-mixing MLP (MLP2).
//
// For every feature f independently, the column of NP values x[*][f] goes through
// DenseBn (NP -> NP) and ReLU, so information moves between particles. All
// features share one kernel; each feature has its own copy of the arithmetic.
// Because inputs are ordered by pT the kernel can weight leading particles
// differently from trailing ones, which is what makes the network non
// permutation-invariant.
//
// Interface: x, y are NP x NF tensors of act_t.
// Timing: one register stage, one jet per cycle.
module token_mlp
  import mixer_pkg::*;
#(
  parameter int NP = NP_DEF,
  parameter int NF = NF_DEF
) (
  input  logic clk,
  input  logic rst,
  input  logic i_valid,
  input  act_t x [NP][NF],
  output logic o_valid,
  output act_t y [NP][NF]
);

  for (genvar f = 0; f < NF; f++) begin : g_f
    act_t col   [NP];
    acc_t o_acc [NP];
    act_t o_q   [NP];
    for (genvar p = 0; p < NP; p++) begin : g_col
      assign col[p] = x[p][f];
    end

    dense_bn #(.IN(NP), .OUT(NP), .LAYER(L_M2)) u_dense (.x(col), .y(o_acc));
    act_quant #(.N(NP), .LAYER(L_M2), .ROW(f), .TRANSPOSE(1'b1), .RELU(1'b1),
                .FRAC_IN(DENSE_FRAC), .NPART(NP))
      u_act (.a(o_acc), .q(o_q));

    for (genvar p = 0; p < NP; p++) begin : g_reg
      always_ff @(posedge clk) y[p][f] <= o_q[p];
    end
  end

  always_ff @(posedge clk)
    if (rst) o_valid <= 1'b0;
    else     o_valid <= i_valid;

endmodule
