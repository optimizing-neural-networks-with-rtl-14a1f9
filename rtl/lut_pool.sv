// lut_pool -- the tabulated learned activation function of one edge.
//
// A BIN-bit index selects a BOUT-bit output level.  The pool is organised the
// way an FPGA would build it: every output bit has its own truth table, and a
// truth table wider than the 6-input fundamental LUT is split into
// 2^(BIN-6) partitions of 64 entries each; the low min(BIN,6) index bits
// address inside a partition and the high bits pick the partition.  The pool
// therefore holds BOUT * 2^max(0, BIN-6) fundamental LUTs.
//
// Interface: `truth[b][a]` is output bit b for index a.  The parent ties it
// to constants (the LUT initialisation produced by the quantization flow);
// synthesis folds it into LUT contents.  Output levels are unsigned, level 0
// being the function's minimum (the offset is restored downstream).
//
// Timing: one cycle, registered output, advancing when `en` is high.
//
// The partitioning and the LUT count follow the paper; the registered output
// and the truth-table port are this design's choices.
module lut_pool
  import kan_pkg::LUT_K;
#(
  parameter int unsigned BIN  = 4,   // input (index) width
  parameter int unsigned BOUT = 5    // output width
) (
  input  logic                          clk,
  input  logic                          en,
  input  logic [BIN-1:0]                idx,
  input  logic [BOUT-1:0][2**BIN-1:0]   truth,
  output logic [BOUT-1:0]               y
);

  localparam int unsigned K     = (BIN < LUT_K) ? BIN : LUT_K;   // LUT size
  localparam int unsigned NPART = 1 << (BIN - K);                // partitions
  localparam int unsigned HW    = (BIN > K) ? BIN - K : 1;

  logic [K-1:0]  lo;
  logic [HW-1:0] hi;
  logic [BOUT-1:0][NPART-1:0] part_out;   // output of every fundamental LUT
  logic [BOUT-1:0] y_d;

  assign lo = idx[K-1:0];
  if (BIN > K) begin : g_hi
    assign hi = idx[BIN-1:K];
  end else begin : g_nohi
    assign hi = '0;
  end

  always_comb begin
    for (int b = 0; b < BOUT; b++) begin
      // One fundamental K-input LUT per (bit, partition): entries
      // p*2^K .. p*2^K + 2^K - 1 of the bit's truth table.
      for (int p = 0; p < NPART; p++)
        part_out[b][p] = truth[b][p * (2**K) + int'(lo)];
      // Partition select (the multiplexer behind the LUTs).
      y_d[b] = part_out[b][hi];
    end
  end

  always_ff @(posedge clk) begin
    if (en) y <= y_d;
  end

endmodule
