// kan_pkg -- constants and helper functions shared by the lookup-based KAN
// accelerator.
//
// The accelerator evaluates a Kolmogorov-Arnold Network (KAN) whose learned
// activation functions are stored as lookup tables.  Every edge i->j of a
// layer owns a quantization block (fixed-point rescale to the edge's table
// index width) and a LUT pool (the tabulated activation function); every
// output neuron owns an accumulator.  This package holds the few numbers the
// blocks agree on: the input count of the FPGA's fundamental LUT (6), the
// width of the fixed-point scale and offset words, and helpers that give the
// bit widths of the layer datapaths.
package kan_pkg;

  // Inputs of one fundamental FPGA LUT ("typically supports input sizes
  // ranging from 1 to 6 bits").
  localparam int unsigned LUT_K = 6;

  // Width of the edge scale factor alpha (unsigned fixed point) and of the
  // stored radix-point position (shift amount).
  localparam int unsigned ALPHA_W = 16;
  localparam int unsigned FRAC_W  = 6;
  // Width of the signed offset added before the shift.
  localparam int unsigned BETA_W  = 32;

  // Number of fundamental LUTs in one pool:
  //   b_out * 2^max(0, b_in - 6)
  function automatic int unsigned lut_blocks(int unsigned bin, int unsigned bout);
    return bout * (1 << ((bin > LUT_K) ? bin - LUT_K : 0));
  endfunction

  // Width of a neuron value after summing n edge outputs of bout bits each.
  function automatic int unsigned sum_width(int unsigned bout, int unsigned n);
    return bout + ((n > 1) ? $clog2(n) : 0);
  endfunction

  // Cycles the accumulator spends on n terms when it adds `lanes` per cycle.
  function automatic int unsigned acc_cycles(int unsigned n, int unsigned lanes);
    return (n + lanes - 1) / lanes;
  endfunction

endpackage
