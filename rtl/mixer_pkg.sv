// mixer_pkg: types, sizes and constant tables shared by the MLP-Mixer jet tagger.
//
// Number formats. Every activation travels in a signed 16-bit container with 8
// fraction bits (act_t). Weights are small signed integers (-7..7) scaled by 2^-3,
// so a dense-layer accumulator carries 8+3 = 11 fraction bits; it is 32 bits wide
// (acc_t), which no layer of the network can overflow.
//
// The network itself (layer sizes, ReLU placement, one skip connection, weight
// sharing across particles) follows the published MLP-Mixer architecture. The
// numbers a trained network would carry -- weights, biases and the per-element
// activation bitwidths found by high-granularity quantization -- are not
// published. This package stands in for them with a fixed integer hash, so the
// hardware has realistic shape (sparse few-bit weights, per-element bitwidths,
// pruned elements) and a reference model can reproduce every value. To load a
// real trained network, replace weight(), bias() and act_fmt().
//
// Constant functions only; nothing here is clocked.
package mixer_pkg;

  // Default network size: 64 particles of 16 features, 16 hidden units, 5 classes.
  localparam int NP_DEF = 64;
  localparam int NF_DEF = 16;
  localparam int NH_DEF = 16;
  localparam int NC_DEF = 5;

  localparam int ACT_W      = 16;            // activation container width
  localparam int ACT_F      = 8;             // activation fraction bits
  localparam int W_BITS     = 4;             // weight width (signed), also CSD digit count
  localparam int W_F        = 3;             // weight fraction bits
  localparam int ACC_W      = 32;            // accumulator width
  localparam int DENSE_FRAC = ACT_F + W_F;   // fraction bits of a dense-layer sum

  localparam int W_ZERO_PCT   = 57;          // share of weights pruned to zero
  localparam int ACT_ZERO_PCT = 15;          // share of hidden activations pruned

  // Pipeline depth of the full tagger, input register to output register.
  localparam int LATENCY = 14;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // One identifier per quantized layer; it selects the layer's constants.
  typedef enum int unsigned {
    L_IN,            // input quantizer
    L_M1A, L_M1B,    // MLP1: n->16, 16->n
    L_M2,            // MLP2: N->N
    L_M3A, L_M3B,    // MLP3: n->16, 16->n
    L_M4,            // MLP4: N->1
    L_H0, L_H1, L_H2, L_H3   // head: 16->16 x3, 16->5
  } layer_e;

  // Per-element quantizer format: integer bits, fraction bits, and whether the
  // element survives (keep=0 means a bitwidth of zero: the element is pruned).
  typedef struct packed {
    logic [3:0] ib;
    logic [3:0] fb;
    logic       keep;
  } qfmt_t;

  // 32-bit integer mixing hash (murmur-style finaliser over four words).
  function automatic int unsigned hash4(int unsigned a, int unsigned b,
                                        int unsigned c, int unsigned d);
    int unsigned h;
    h = 32'h9E37_79B9 ^ a;
    h = (h ^ (h >> 15)) * 32'h85EB_CA6B;
    h = h ^ b;
    h = (h ^ (h >> 13)) * 32'hC2B2_AE35;
    h = h ^ c;
    h = (h ^ (h >> 16)) * 32'h27D4_EB2F;
    h = h ^ d;
    h = (h ^ (h >> 15)) * 32'h1656_67B1;
    return h ^ (h >> 16);
  endfunction

  // Weight (row o, column i) of a layer, as an integer in units of 2^-W_F.
  function automatic int weight(layer_e l, int o, int i);
    int unsigned h;
    int          mag;
    h = hash4(int'(l), o, i, 1);
    if ((h % 100) < W_ZERO_PCT) return 0;
    mag = 1 + int'((h >> 8) % 7);
    return h[20] ? -mag : mag;
  endfunction

  // Fused batch-norm bias of output o, in units of 2^-DENSE_FRAC (range +-0.5).
  function automatic int bias(layer_e l, int o);
    int unsigned h;
    h = hash4(int'(l), o, 0, 2);
    return int'((h >> 4) % 2049) - 1024;
  endfunction

  // Quantizer format of element (particle p, feature/unit c) of a layer.
  // For the input layer the chance of pruning rises with the particle's pT rank
  // (10% for the leading particle up to 60% for the last of np).
  function automatic qfmt_t act_fmt(layer_e l, int p, int c, int np);
    int unsigned h;
    qfmt_t       f;
    int          zpct;
    h    = hash4(int'(l), p, c, 3);
    zpct = (l == L_IN) ? 10 + (50 * p) / np : ACT_ZERO_PCT;
    f.keep = (h % 100) >= zpct;
    f.ib   = 4'(2 + (h >> 8) % 4);     // 2..5 integer bits
    f.fb   = 4'((h >> 12) % 7);        // 0..6 fraction bits
    if (l == L_H3) begin               // class scores: never pruned, full precision
      f.keep = 1'b1;
      f.ib   = 4'd6;
      f.fb   = 4'(ACT_F);
    end
    return f;
  endfunction

  // Canonical signed digit form of w (|w| <= 7): {negative digits, positive digits},
  // so that w = pos - neg, with no two adjacent non-zero digits.
  function automatic logic [2*W_BITS-1:0] csd(int w);
    logic [W_BITS-1:0] pos, neg;
    int                v, d;
    pos = '0;
    neg = '0;
    v   = w;
    for (int k = 0; k < W_BITS; k++) begin
      d = (v & 1) != 0 ? 2 - (v & 3) : 0;
      if (d > 0) pos[k] = 1'b1;
      if (d < 0) neg[k] = 1'b1;
      v = (v - d) >>> 1;
    end
    return {neg, pos};
  endfunction

  // Quantize a value with frac_in fraction bits (frac_in >= ACT_F) to format f:
  // optional ReLU, floor to f.fb fraction bits, saturate to f.ib integer bits
  // (unsigned range after ReLU, signed range otherwise), zero if pruned.
  function automatic act_t quantize(acc_t a, int frac_in, qfmt_t f, bit relu);
    acc_t v, maxv, minv, lsb;
    lsb  = acc_t'(1) <<< (ACT_F - int'(f.fb));
    v    = a >>> (frac_in - ACT_F);
    v    = v & ~(lsb - acc_t'(1));
    maxv = (acc_t'(1) <<< (int'(f.ib) + ACT_F)) - lsb;
    minv = relu ? acc_t'(0) : -(acc_t'(1) <<< (int'(f.ib) + ACT_F));
    if (!f.keep)      v = '0;
    else if (v > maxv) v = maxv;
    else if (v < minv) v = minv;
    return act_t'(v);
  endfunction

endpackage
