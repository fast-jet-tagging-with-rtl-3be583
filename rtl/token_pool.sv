// token_pool: the particle-reducing MLP (MLP4).
//
// For every feature f, DenseBn (NP -> 1) followed by ReLU collapses the column of
// NP particle values into one number, turning the NP x NF tensor into an NF
// vector that describes the whole jet. One kernel is shared by all features.
//
// Interface: x is an NP x NF tensor, y an NF vector, both act_t.
// Timing: one register stage, one jet per cycle.
module token_pool
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
  output act_t y [NF]
);

  for (genvar f = 0; f < NF; f++) begin : g_f
    act_t col   [NP];
    acc_t o_acc [1];
    act_t o_q   [1];
    for (genvar p = 0; p < NP; p++) begin : g_col
      assign col[p] = x[p][f];
    end

    dense_bn #(.IN(NP), .OUT(1), .LAYER(L_M4)) u_dense (.x(col), .y(o_acc));
    act_quant #(.N(1), .LAYER(L_M4), .ROW(f), .TRANSPOSE(1'b0), .RELU(1'b1),
                .FRAC_IN(DENSE_FRAC), .NPART(NP))
      u_act (.a(o_acc), .q(o_q));
    always_ff @(posedge clk) y[f] <= o_q[0];
  end

  always_ff @(posedge clk)
    if (rst) o_valid <= 1'b0;
    else     o_valid <= i_valid;

endmodule
