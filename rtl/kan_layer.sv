// kan_layer -- one fully connected KAN layer built from lookups.
//
// For every edge i->j (N_IN x N_OUT of them) the layer holds a quantization
// block, which rescales input neuron x_i to the edge's table index, and a LUT
// pool, which looks up the edge's learned activation phi_ij.  For every output
// neuron j an accumulator adds the N_IN looked-up values:
//
//   y_j = sum_i  phi_ij( Q_ij(x_i) )
//
// Per-edge constants (table contents, fine-grained input/output widths,
// scale, radix position, offset) come from kan_model_pkg, indexed by
// (LAYER, i, j).  With FINE = 0 every edge uses the layer's global widths
// BIN/BOUT; with FINE = 1 edges may be narrower (fine-grained quantization).
//
// Timing: a three-stage pipeline (two quantization cycles, one lookup cycle)
// feeds the accumulators, which then take ceil(N_IN/LANES) cycles.  The
// pipeline stalls as a whole when the accumulators cannot take a new sample.
// Latency from input handshake to out_valid is 3 + ceil(N_IN/LANES) cycles.
//
// Interface: valid/ready in, valid/ready out.  Inputs are unsigned XW-bit
// integers; outputs are unsigned sums of the edges' level indices, YW bits
// wide; the level offsets of the edges are restored by whatever reads them.
//
// The per-edge Q + LUT pool + per-neuron accumulator structure follows the
// paper; the pipeline control is this design's own.
module kan_layer
  import kan_pkg::*;
#(
  parameter int unsigned LAYER = 0,    // layer index into kan_model_pkg
  parameter int unsigned N_IN  = 2,    // neurons entering the layer
  parameter int unsigned N_OUT = 3,    // neurons leaving the layer
  parameter int unsigned XW    = 16,   // input neuron width
  parameter int unsigned BIN   = 4,    // global LUT input width
  parameter int unsigned BOUT  = 5,    // global LUT output width
  parameter int unsigned LANES = 2,    // accumulator terms per cycle
  parameter bit          FINE  = 1'b1, // per-edge (fine-grained) widths
  parameter int unsigned YW    = sum_width(BOUT, N_IN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [XW-1:0]  x [N_IN],
  output logic           out_valid,
  input  logic           out_ready,
  output logic [YW-1:0]  y [N_OUT]
);

  // Truth tables of edge i->j, one row per output bit, at the layer's global
  // size; an edge with fewer input or output bits uses the lower part.
  function automatic logic [BOUT-1:0][2**BIN-1:0] edge_truth(int unsigned i,
                                                             int unsigned j,
                                                             int unsigned bo);
    logic [BOUT-1:0][2**BIN-1:0] t;
    t = '0;
    for (int a = 0; a < 2**BIN; a++) begin
      int unsigned v;
      v = kan_model_pkg::edge_table(LAYER, i, j, bo, a);
      for (int b = 0; b < BOUT; b++) t[b][a] = v[b];
    end
    return t;
  endfunction

  logic v1, v2, v3;            // valid of quant stage 1, 2 and lookup stage
  logic en;                    // pipeline advance
  logic acc_ready_all, acc_valid_all;
  logic [N_OUT-1:0] acc_in_ready, acc_out_valid;
  logic [BOUT-1:0] col [N_OUT][N_IN];   // lookup results per output neuron

  assign en       = !v3 || acc_ready_all;
  assign in_ready = en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else if (en) begin
      v1 <= in_valid; v2 <= v1; v3 <= v2;
    end
  end

  for (genvar i = 0; i < N_IN; i++) begin : g_src
    for (genvar j = 0; j < N_OUT; j++) begin : g_dst
      localparam int unsigned BI = kan_model_pkg::edge_bin(LAYER, i, j, BIN, FINE);
      localparam int unsigned BO = kan_model_pkg::edge_bout(LAYER, i, j, BOUT, FINE);
      localparam int unsigned FR = kan_model_pkg::edge_frac(XW, BI);
      localparam int unsigned AL = kan_model_pkg::edge_alpha(LAYER, i, j);
      localparam int          BE = kan_model_pkg::edge_beta(LAYER, i, j, XW, BI);

      // LUT initialisation of this edge.
      localparam logic [BOUT-1:0][2**BIN-1:0] TRUTH = edge_truth(i, j, BO);

      logic [BI-1:0]              idx;
      logic [BO-1:0]              yo;
      logic [BO-1:0][2**BI-1:0]   truth;

      always_comb begin
        for (int b = 0; b < BO; b++) truth[b] = TRUTH[b][2**BI-1:0];
      end

      quant_block #(.XW(XW), .BIN(BI)) u_q (
        .clk, .en, .x(x[i]),
        .alpha(ALPHA_W'(AL)), .frac(FRAC_W'(FR)), .beta(BETA_W'(BE)),
        .idx
      );

      lut_pool #(.BIN(BI), .BOUT(BO)) u_lut (
        .clk, .en, .idx, .truth, .y(yo)
      );

      assign col[j][i] = BOUT'(yo);
    end
  end

  assign acc_ready_all = &acc_in_ready;
  assign acc_valid_all = &acc_out_valid;
  assign out_valid     = acc_valid_all;

  for (genvar j = 0; j < N_OUT; j++) begin : g_acc
    kan_accumulator #(.N(N_IN), .W(BOUT), .LANES(LANES), .SW(YW)) u_acc (
      .clk, .rst_n,
      .in_valid (v3 && acc_ready_all),
      .in_ready (acc_in_ready[j]),
      .terms    (col[j]),
      .out_valid(acc_out_valid[j]),
      .out_ready(out_ready && acc_valid_all),
      .sum      (y[j])
    );
  end

  // All accumulators of a layer run in lock step.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (acc_in_ready == '0) || (acc_in_ready == '1));
  assert property (@(posedge clk) disable iff (!rst_n)
                   (acc_out_valid == '0) || (acc_out_valid == '1));

endmodule
