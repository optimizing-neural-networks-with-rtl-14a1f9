// quant_block -- per-edge precision conversion in front of a LUT pool.
//
// A neuron value x arrives as an unsigned integer in the step size of the
// previous layer (or of the raw input, for layer 1).  The LUT pool of edge
// i->j needs it as a BIN-bit index in its own step size.  The conversion is
// a fixed-point rescale:
//
//   idx = clamp( round( (x * alpha + beta) / 2^frac ), 0, 2^BIN - 1 )
//
// alpha is the edge's scale factor s_prev/s_edge held as an unsigned fixed
// point number, frac is the stored position of its radix point, and beta is a
// signed offset in the same fixed-point scale.  Rounding is half-up: 2^(frac-1)
// is added before the arithmetic right shift.
//
// Timing: two register stages, as the two cycles the design allots to this
// block: cycle 1 multiplies (x * alpha), cycle 2 adds, shifts, rounds and
// clamps.  Both stages advance only when `en` is high (pipeline stall).
//
// The multiply and shift follow the paper's precision conversion.  The offset
// beta and the clamp are this design's own: beta is where the standardization
// offsets of the previous layer's activation outputs (alpha * delta), which the
// paper folds into this block, and the subtraction of the range minimum of
// uniform quantization are applied; the clamp implements the clamp of uniform
// quantization.  alpha, frac and beta are ports so that one module serves all
// edges; the parent ties them to constants, which synthesis folds into the
// logic.
module quant_block
  import kan_pkg::ALPHA_W, kan_pkg::FRAC_W, kan_pkg::BETA_W;
#(
  parameter int unsigned XW  = 16,   // width of the incoming neuron value
  parameter int unsigned BIN = 4     // LUT-pool input width of this edge
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [XW-1:0]            x,
  input  logic [ALPHA_W-1:0]       alpha,
  input  logic [FRAC_W-1:0]        frac,
  input  logic signed [BETA_W-1:0] beta,
  output logic [BIN-1:0]           idx
);

  localparam int unsigned PW   = XW + ALPHA_W;                 // product width
  localparam int unsigned SUMW = (PW + 2 > BETA_W + 1) ? PW + 2 : BETA_W + 1;
  localparam logic signed [SUMW-1:0] IDX_MAX = SUMW'((1 << BIN) - 1);

  logic [PW-1:0]          prod_q;
  logic signed [SUMW-1:0] sum, shifted;

  // Cycle 1: fixed-point multiplication.
  always_ff @(posedge clk) begin
    if (en) prod_q <= PW'(x) * PW'(alpha);
  end

  // Cycle 2: offset, round, shift, clamp.
  always_comb begin
    sum = $signed(SUMW'(prod_q)) + SUMW'(beta);
    if (frac != '0) sum = sum + (SUMW'(1) <<< (frac - 1'b1));
    shifted = sum >>> frac;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      if (shifted < 0)             idx <= '0;
      else if (shifted > IDX_MAX)  idx <= '1;
      else                         idx <= BIN'(shifted);
    end
  end

endmodule
