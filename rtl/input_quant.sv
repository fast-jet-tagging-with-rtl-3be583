// input_quant: registered per-element quantizer for the NP x NF particle inputs.
//
// This is the input quantizer of the network, the place where high-granularity
// quantization matters most: every (particle, feature) pair has its own format,
// and pairs the network does not need (many features of low-pT particles) have
// zero bits and are dropped. Because particles arrive ordered by pT, particle p
// always occupies the same slot and its formats can be fixed in hardware. The
// formats come from mixer_pkg::act_fmt(L_IN, ...); values are signed, floored and
// saturated.
//
// Interface: x[p][f] raw features (act_t, ACT_F fraction bits), i_valid marks a
// jet; q is the quantized tensor, o_valid its valid bit.
// Timing: one register stage, a new jet every cycle. rst clears only o_valid.
module input_quant
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
  output act_t q [NP][NF]
);

  for (genvar p = 0; p < NP; p++) begin : g_p
    acc_t a  [NF];
    act_t qc [NF];
    for (genvar f = 0; f < NF; f++) begin : g_f
      assign a[f] = acc_t'(x[p][f]);
    end
    act_quant #(
      .N(NF), .LAYER(L_IN), .ROW(p), .TRANSPOSE(1'b0),
      .RELU(1'b0), .FRAC_IN(ACT_F), .NPART(NP)
    ) u_q (.a(a), .q(qc));
    always_ff @(posedge clk) q[p] <= qc;
  end

  always_ff @(posedge clk)
    if (rst) o_valid <= 1'b0;
    else     o_valid <= i_valid;

endmodule
