// act_quant: ReLU (optional) followed by a per-element fixed-point quantizer.
//
// High-granularity quantization gives every activation its own format, so each
// of the N elements here has its own integer-bit and fraction-bit count, fixed at
// elaboration from mixer_pkg::act_fmt(). An element whose bitwidth is zero is
// pruned: its output is the constant 0 and synthesis removes everything that only
// fed it. Values are floored to the element's fraction bits and saturated to its
// range (non-negative when RELU=1, two's complement otherwise). Floor rounding and
// saturation are this design's choices; the published work does not state them.
//
// Element e of the instance is element (particle ROW, unit e) of the layer, or
// (particle e, feature ROW) when TRANSPOSE=1, as used by the particle-axis mixers.
// NPART is the particle count, used only by the input layer's bitwidth map.
// Interface: a are sums with FRAC_IN fraction bits; q are act_t with ACT_F
// fraction bits. Timing: purely combinational.
module act_quant
  import mixer_pkg::*;
#(
  parameter int     N         = 16,
  parameter layer_e LAYER     = L_M1A,
  parameter int     ROW       = 0,
  parameter bit     TRANSPOSE = 1'b0,
  parameter bit     RELU      = 1'b1,
  parameter int     FRAC_IN   = DENSE_FRAC,
  parameter int     NPART     = NP_DEF
) (
  input  acc_t a [N],
  output act_t q [N]
);

  for (genvar e = 0; e < N; e++) begin : g_e
    localparam qfmt_t FMT = TRANSPOSE ? act_fmt(LAYER, e, ROW, NPART)
                                      : act_fmt(LAYER, ROW, e, NPART);
    always_comb q[e] = quantize(a[e], FRAC_IN, FMT, RELU);
  end

endmodule
