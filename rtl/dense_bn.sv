// dense_bn: one fused dense + batch-normalisation layer, y = W*x + b, with the
// constant matrix W multiplied by distributed arithmetic (shift and add, no
// multipliers).
//
// Batch normalisation is folded into the kernel and bias, so at inference the
// layer is a plain affine map. Each constant weight is rewritten in canonical
// signed digit (CSD) form at elaboration; an output is then its bias plus, for
// every input and every non-zero digit k, the input shifted left by k, added or
// subtracted. Zero weights produce no logic at all. The CSD rewriting follows the
// first step of the published optimisation; its second step, sharing repeated
// two-term subexpressions between outputs, is not done here and is left to
// synthesis.
//
// Interface: x are IN activations (act_t, ACT_F fraction bits); y are OUT sums
// (acc_t, DENSE_FRAC fraction bits). LAYER picks the constants from mixer_pkg.
// Timing: purely combinational; the caller registers the quantized result.
module dense_bn
  import mixer_pkg::*;
#(
  parameter int     IN    = 16,
  parameter int     OUT   = 16,
  parameter layer_e LAYER = L_M1A
) (
  input  act_t x [IN],
  output acc_t y [OUT]
);

  localparam int ND = W_BITS;   // CSD digits per weight

  function automatic logic [OUT*IN*ND-1:0] digit_masks(bit negative);
    logic [OUT*IN*ND-1:0] m;
    logic [2*ND-1:0]      d;
    for (int o = 0; o < OUT; o++)
      for (int i = 0; i < IN; i++) begin
        d = csd(weight(LAYER, o, i));
        m[(o*IN+i)*ND +: ND] = negative ? d[2*ND-1:ND] : d[ND-1:0];
      end
    return m;
  endfunction

  function automatic logic [OUT*ACC_W-1:0] bias_vector();
    logic [OUT*ACC_W-1:0] b;
    for (int o = 0; o < OUT; o++) b[o*ACC_W +: ACC_W] = acc_t'(bias(LAYER, o));
    return b;
  endfunction

  localparam logic [OUT*IN*ND-1:0] POS  = digit_masks(1'b0);
  localparam logic [OUT*IN*ND-1:0] NEG  = digit_masks(1'b1);
  localparam logic [OUT*ACC_W-1:0] BIAS = bias_vector();

  always_comb begin
    for (int o = 0; o < OUT; o++) begin
      acc_t acc;
      acc = acc_t'(BIAS[o*ACC_W +: ACC_W]);
      for (int i = 0; i < IN; i++)
        for (int k = 0; k < ND; k++) begin
          if (POS[(o*IN+i)*ND + k]) acc = acc + (acc_t'(x[i]) <<< k);
          if (NEG[(o*IN+i)*ND + k]) acc = acc - (acc_t'(x[i]) <<< k);
        end
      y[o] = acc;
    end
  end

endmodule
