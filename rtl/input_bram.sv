// input_bram -- on-chip block RAM that buffers input samples for the
// accelerator.
//
// The host writes one input element per cycle (sample slot, element index,
// value).  The read side returns a whole sample, all N elements side by side,
// because the first layer's quantization blocks take every input neuron in
// the same cycle.  Reads are synchronous: rd_data holds the sample addressed
// in the cycle before, and keeps it until the next read.
//
// The paper places a BRAM between the host and the accelerator; its depth,
// word layout and ports are this design's own.
module input_bram #(
  parameter int unsigned N     = 784,  // elements per sample
  parameter int unsigned W     = 16,   // bits per element
  parameter int unsigned DEPTH = 16,   // sample slots
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned EW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  // host write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_slot,
  input  logic [EW-1:0] wr_elem,
  input  logic [W-1:0]  wr_data,
  // sample read port
  input  logic          rd_en,
  input  logic [AW-1:0] rd_slot,
  output logic [W-1:0]  rd_data [N]
);

  logic [N-1:0][W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot][wr_elem] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int n = 0; n < N; n++) rd_data[n] <= mem[rd_slot][n];
  end

  assert property (@(posedge clk) wr_en |-> (int'(wr_elem) < N) && (int'(wr_slot) < DEPTH));
  assert property (@(posedge clk) rd_en |-> int'(rd_slot) < DEPTH);

endmodule
