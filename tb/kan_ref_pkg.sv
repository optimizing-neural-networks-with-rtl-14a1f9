// kan_ref_pkg -- reference model of the accelerator's arithmetic, for the
// testbenches.  It works on plain integers (longint) and computes, edge by
// edge, what the RTL should produce: the rounded and clamped fixed-point
// rescale of the quantization block, the table lookup and the neuron sum.
// Model constants are taken from kan_model_pkg, which plays the part of the
// trained model.  Counters record how often the index clamps engaged.
package kan_ref_pkg;

  int unsigned n_clamp_lo = 0;
  int unsigned n_clamp_hi = 0;
  int unsigned n_fine_edges = 0;    // edges narrower than the layer's width
  int unsigned n_split_lookups = 0; // lookups in pools with > 6 input bits

  function automatic int unsigned sumw(int unsigned bout, int unsigned n);
    int unsigned w = 0;
    while ((1 << w) < n) w++;
    return bout + w;
  endfunction

  // idx = clamp(round_half_up((x*alpha + beta) / 2^frac), 0, 2^bin-1)
  function automatic longint quant(longint x, longint alpha, int frac,
                                   longint beta, int bin);
    longint num, q;
    num = x * alpha + beta;
    if (frac > 0) num = num + (longint'(1) << (frac - 1));
    // floor division by 2^frac
    if (num >= 0) q = num / (longint'(1) << frac);
    else          q = -((-num + (longint'(1) << frac) - 1) / (longint'(1) << frac));
    if (q < 0) begin
      n_clamp_lo++;
      return 0;
    end
    if (q > (longint'(1) << bin) - 1) begin
      n_clamp_hi++;
      return (longint'(1) << bin) - 1;
    end
    return q;
  endfunction

  // One layer: y[j] = sum_i table_ij[ Q_ij(x[i]) ]
  function automatic void layer(int unsigned lyr, int unsigned xw,
                                int unsigned bin, int unsigned bout, bit fine,
                                int unsigned n_in, int unsigned n_out,
                                const ref longint x[], ref longint y[]);
    y = new[n_out];
    for (int unsigned j = 0; j < n_out; j++) begin
      y[j] = 0;
      for (int unsigned i = 0; i < n_in; i++) begin
        int unsigned bi, bo, fr;
        longint al, be, idx;
        bi = kan_model_pkg::edge_bin(lyr, i, j, bin, fine);
        bo = kan_model_pkg::edge_bout(lyr, i, j, bout, fine);
        fr = kan_model_pkg::edge_frac(xw, bi);
        al = longint'(kan_model_pkg::edge_alpha(lyr, i, j));
        be = longint'(kan_model_pkg::edge_beta(lyr, i, j, xw, bi));
        if (bi != bin || bo != bout) n_fine_edges++;
        if (bi > 6) n_split_lookups++;
        idx = quant(x[i], al, fr, be, bi);
        y[j] += longint'(kan_model_pkg::edge_table(lyr, i, j, bo, int'(idx)));
      end
    end
  endfunction

endpackage
