// kan_model_pkg -- per-edge constants of the KAN model that is baked into the
// accelerator: table contents, fine-grained bit widths, fixed-point scale
// factors, radix positions and offsets.
//
// In a deployment these numbers come out of training and of the quantization
// flow (global quantization, then fine-grained trimming of each edge's input
// and output width, then the choice of a short fixed-point scale per edge).
// This package is the single place where they enter the RTL: replace the
// bodies of the functions below with the trained model's values (for
// example by generating this file) and the rest of the RTL stays unchanged.
//
// The bodies given here describe a synthetic model.  Its values are drawn from
// a hash of (layer, source neuron, destination neuron) so that every edge has
// its own table, scale and offset, and so that the datapath's corner cases
// (index clamping at both ends, reduced per-edge widths) occur.  Testbenches
// use the same functions as the source of the model, and compute the
// datapath's result on their own.
package kan_model_pkg;

  import kan_pkg::*;

  function automatic int unsigned mix(int unsigned a, int unsigned b,
                                      int unsigned c, int unsigned d);
    int unsigned h;
    h = (a + 1) * 32'h9E37_79B1;
    h = h ^ ((b + 7) * 32'h85EB_CA77);
    h = h ^ ((c + 13) * 32'hC2B2_AE3D);
    h = h ^ ((d + 17) * 32'h27D4_EB2F);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  // Fine-grained input width of edge i->j in layer `layer`; `bin_max` is the
  // layer's global width.  One edge in four is trimmed by one bit.
  function automatic int unsigned edge_bin(int unsigned layer, int unsigned i,
                                           int unsigned j, int unsigned bin_max,
                                           bit fine);
    if (!fine || bin_max <= 1) return bin_max;
    return ((mix(layer, i, j, 1) & 3) == 0) ? bin_max - 1 : bin_max;
  endfunction

  // Fine-grained output width: the global width minus 0..3 bits, at least 1.
  function automatic int unsigned edge_bout(int unsigned layer, int unsigned i,
                                            int unsigned j, int unsigned bout_max,
                                            bit fine);
    int unsigned cut;
    if (!fine) return bout_max;
    cut = mix(layer, i, j, 2) & 3;
    return (cut >= bout_max) ? 1 : bout_max - cut;
  endfunction

  // Table entry `addr` of edge i->j: the quantized activation output, already
  // offset so that level 0 is the function's minimum.
  function automatic int unsigned edge_table(int unsigned layer, int unsigned i,
                                             int unsigned j, int unsigned bout,
                                             int unsigned addr);
    return mix(layer, i, j, addr + 64) & ((1 << bout) - 1);
  endfunction

  // Radix-point position of the scale factor: the number of fractional bits.
  // Chosen so that alpha holds about five significant bits.
  function automatic int unsigned edge_frac(int unsigned xw, int unsigned bin);
    return xw + 4 - bin;
  endfunction

  // Scale factor alpha = s_prev / s_edge, fixed point with edge_frac bits.
  function automatic int unsigned edge_alpha(int unsigned layer, int unsigned i,
                                             int unsigned j);
    return 16 + (mix(layer, i, j, 3) & 7);
  endfunction

  // Offset added to x*alpha before the shift, in units of 2^-frac index
  // steps.  It folds together the previous layer's per-edge level offsets
  // (alpha * sum of delta) and the subtraction of the input range minimum.
  function automatic int edge_beta(int unsigned layer, int unsigned i,
                                   int unsigned j, int unsigned xw,
                                   int unsigned bin);
    int unsigned frac;
    frac = edge_frac(xw, bin);
    return -int'(mix(layer, i, j, 4) & ((1 << (frac + bin - 2)) - 1));
  endfunction

  // Standardization offset of output neuron j of the last layer: the sum of
  // the level offsets delta of its incoming edges, in output steps.
  function automatic int out_offset(int unsigned j);
    return int'(mix(99, j, 0, 5) & 255) - 128;
  endfunction

endpackage
