// kan_accumulator -- sums the activation outputs arriving at one neuron.
//
// A neuron of layer l+1 is the sum of the LUT-pool outputs of all N edges
// that end in it.  All edges of a neuron share one output step size, so the
// outputs need no rescaling before the sum; their level offsets are restored
// by the next layer's quantization blocks (or by the top for the last layer).
//
// The sum is spread over several cycles: the N terms are captured when the
// input handshake completes, then LANES of them are added per cycle, so a
// neuron with N inputs takes ceil(N/LANES) cycles.  With LANES >= N the
// accumulator takes one sample per cycle.
//
// Interface: valid/ready on both sides.  `in_ready` is high when idle, or in
// the last summing cycle when the result register is free, so back-to-back
// samples lose no cycle.  `out_valid` holds `sum` until `out_ready`.
//
// Timing: the result appears ceil(N/LANES) cycles after the input handshake.
//
// The paper gives the function (multi-cycle accumulation, handshake
// signals, DSP-based adder); the lane structure, the handshake rules and the
// sum width are this design's own.
module kan_accumulator #(
  parameter int unsigned N     = 784,  // terms (incoming edges)
  parameter int unsigned W     = 5,    // width of one term
  parameter int unsigned LANES = 2,    // terms added per cycle
  parameter int unsigned SW    = W + ((N > 1) ? $clog2(N) : 0)  // sum width
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [W-1:0]      terms [N],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [SW-1:0]     sum
);

  localparam int unsigned STEPS = (N + LANES - 1) / LANES;
  localparam int unsigned CW    = (STEPS > 1) ? $clog2(STEPS) : 1;

  logic [W-1:0]  terms_q [STEPS*LANES];
  logic [SW-1:0] acc, partial;
  logic [CW-1:0] step;
  logic          busy, last, out_free, advance;

  assign last     = (step == CW'(STEPS - 1));
  assign out_free = !out_valid || out_ready;
  assign advance  = busy && (!last || out_free);
  assign in_ready = !busy || (last && out_free);

  // LANES terms of the current step.
  always_comb begin
    partial = '0;
    for (int k = 0; k < LANES; k++)
      partial = partial + SW'(terms_q[int'(step) * LANES + k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      step      <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (advance) begin
        if (last) begin
          sum       <= acc + partial;
          out_valid <= 1'b1;
          busy      <= 1'b0;
        end else begin
          acc  <= acc + partial;
          step <= step + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        busy <= 1'b1;
        step <= '0;
        acc  <= '0;
      end
    end
  end

  // Term capture (padding lanes past N read as zero).
  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int n = 0; n < STEPS * LANES; n++)
        terms_q[n] <= (n < N) ? terms[n] : '0;
  end

  // An accepted sample must not be overwritten before it is summed.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && in_ready && busy) |-> last && out_free);
  // The result is held while it waits.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> out_valid && $stable(sum));

endmodule
