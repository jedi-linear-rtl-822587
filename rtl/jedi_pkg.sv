// jedi_pkg -- shared types, number formats and constant tables of the JEDI-linear jet tagger.
//
// The tagger is a fully unrolled, feed-forward network: every layer is a constant
// matrix-vector multiply (CMVM) whose weights are fixed at elaboration time and built from
// shift-add/subtract terms instead of multipliers. This package holds what all layers share:
//   * the activation format: 8-bit signed integers (act_t) between every pair of layers;
//   * the requantization rule: a layer's wide accumulator is shifted right arithmetically by
//     W_SHIFT bits (round toward minus infinity) and saturated to 8 bits;
//   * layer identifiers, used to look up each layer's weights and biases;
//   * weight() and bias(), the constant tables.
//
// The network is meant to be trained with per-weight bitwidths (0..8 bits; a weight with zero
// bits is pruned). Trained values are not part of this release, so weight() and bias() produce
// a deterministic stand-in set from an integer hash of (layer, row, column): about 62% of the
// weights are pruned, most of the rest have 1 or 2 magnitude bits and a few have up to 8. To
// deploy a trained model, replace the bodies of weight() and bias() with the trained tables;
// nothing else changes. The 8-bit formats and the shift of 6 are this design's choices.
package jedi_pkg;

  localparam int ACT_W   = 8;                 // activation width (signed)
  localparam int W_SHIFT = 6;                 // weights carry W_SHIFT fractional bits
  localparam int W_MAXB  = 8;                 // largest weight magnitude: 8 bits
  localparam int CSD_D   = W_MAXB + 1;        // canonical-signed-digit positions per weight
  localparam int ACT_MAX = (1 << (ACT_W - 1)) - 1;
  localparam int ACT_MIN = -(1 << (ACT_W - 1));

  typedef logic signed [ACT_W-1:0] act_t;

  // Canonical signed digit form of a weight: w = sum_k (pos[k] - neg[k]) * 2**k, with no two
  // adjacent non-zero digits (the fewest add/subtract terms for a constant multiplier).
  typedef struct packed {
    logic [CSD_D-1:0] pos;
    logic [CSD_D-1:0] neg;
  } csd_t;

  // Layer identifiers (one weight table each).
  localparam int L_IN_PROJ = 1;  // Einsum Dense1: particle features -> D_E
  localparam int L_DENSE2  = 2;  // Einsum Dense2: per-particle term, no bias
  localparam int L_DENSE3  = 3;  // Dense3: global context term, carries the bias C
  localparam int L_EINSUM4 = 4;  // Einsum Dense after the gathering: D_E -> D_E'
  localparam int L_MLP0    = 5;  // MLP head layers L_MLP0 .. L_MLP0+3

  // 32-bit integer hash (murmur3 finalizer) of a table coordinate.
  function automatic int unsigned mix(int layer, int row, int col);
    int unsigned h;
    h = int'(layer) * 32'h9E37_79B1 ^ int'(row) * 32'h85EB_CA77 ^ int'(col) * 32'hC2B2_AE3D;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Magnitude bitwidth of weight (row = output, col = input); 0 means pruned.
  function automatic int weight_bits(int layer, int row, int col);
    logic [6:0] h;
    h = 7'(mix(layer, row, col));
    case (h[3:0])
      4'd10, 4'd11: return 1;
      4'd12, 4'd13: return 2;
      4'd14:        return 3;
      4'd15:        return 4 + int'(h[6:4]) % 5;
      default:      return 0;
    endcase
  endfunction

  // Integer weight; its real value is weight() / 2**W_SHIFT. Range -255 .. 255.
  function automatic int weight(int layer, int row, int col);
    int unsigned h;
    int b, m;
    b = weight_bits(layer, row, col);
    if (b == 0) return 0;
    h = mix(layer, row, col);
    m = int'((h >> 8) & ((32'd1 << b) - 1)) | (1 << (b - 1));
    return h[31] ? -m : m;
  endfunction

  // Integer bias in accumulator units (real value bias() / 2**W_SHIFT), range -256 .. 255.
  // Einsum Dense2 has none: the bias of the gathering is carried by Dense3.
  function automatic int bias(int layer, int row);
    int unsigned h;
    if (layer == L_DENSE2) return 0;
    h = mix(layer, row, 4096);
    return int'((h >> 8) % 32'd512) - 256;
  endfunction

  function automatic csd_t csd(int w);
    csd_t r;
    int n, d;
    r = '0;
    n = w;
    for (int k = 0; k < CSD_D; k++) begin
      d = 0;
      if (n % 2 != 0) d = ((n & 3) == 1) ? 1 : -1;
      r.pos[k] = (d == 1);
      r.neg[k] = (d == -1);
      n = (n - d) >>> 1;
    end
    return r;
  endfunction

endpackage
