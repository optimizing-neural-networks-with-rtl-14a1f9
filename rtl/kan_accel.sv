// kan_accel -- lookup-based KAN inference accelerator (top level).
//
// The host writes input samples into an on-chip block RAM, then starts the
// accelerator.  A small feeder reads the samples one at a time and streams
// them through a chain of NUM_LAYERS KAN layers.  In every layer each edge
// rescales its input neuron to a short table index (quantization block) and
// looks up its learned activation function (LUT pool); each neuron adds up
// its incoming lookups (accumulator).  The last layer's sums are turned into
// signed results by adding each output neuron's level offset, and leave on a
// valid/ready stream.
//
// Default size: the (784, 64, 32, 10) MNIST network with 4-bit LUT inputs and
// 5-bit LUT outputs as global widths, narrower per edge where the model says
// so (FINE = 1).  The model's constants live in kan_model_pkg.
//
// Interface
//   wr_*          host writes element wr_elem of sample slot wr_slot
//   start         pulse: process slots 0 .. num_samples-1 in order
//   busy          high while the feeder still has samples to send
//   out_*         one result vector per sample, in order; held until out_ready
//
// Timing: a sample spends 1 cycle in the RAM read, then per layer
// 3 + ceil(n_l / LANES) cycles; the output offset adder is combinational.
// Layers work on different samples at the same time, so the throughput is
// set by the slowest layer (ceil(max n_l / LANES) cycles per sample).
//
// What follows the paper: the BRAM -> layer 1 -> ... -> layer N chain, and
// the per-edge Q + LUT pool and per-neuron accumulator inside each layer.
// This design's own: the feeder, the handshakes, the RAM layout, the output
// offset stage and the number of terms the accumulators add per cycle.
module kan_accel
  import kan_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 3,
  parameter int unsigned DIMS [NUM_LAYERS+1] = '{784, 64, 32, 10},
  parameter int unsigned IN_W  = 16,                 // raw input element width
  parameter int unsigned BIN  [NUM_LAYERS] = '{4, 4, 4},  // global LUT input widths
  parameter int unsigned BOUT [NUM_LAYERS] = '{5, 5, 5},  // global LUT output widths
  parameter int unsigned LANES = 2,                  // accumulator terms per cycle
  parameter bit          FINE  = 1'b1,               // fine-grained per-edge widths
  parameter int unsigned DEPTH = 16,                 // sample slots in the RAM
  // derived
  parameter int unsigned SLOT_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned ELEM_W = (DIMS[0] > 1) ? $clog2(DIMS[0]) : 1,
  parameter int unsigned YW_L   = sum_width(BOUT[NUM_LAYERS-1], DIMS[NUM_LAYERS-1]),
  parameter int unsigned OUT_W  = ((YW_L > 9) ? YW_L : 9) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host side of the input RAM
  input  logic                     wr_en,
  input  logic [SLOT_W-1:0]        wr_slot,
  input  logic [ELEM_W-1:0]        wr_elem,
  input  logic [IN_W-1:0]          wr_data,
  // run control
  input  logic                     start,
  input  logic [SLOT_W:0]          num_samples,
  output logic                     busy,
  // results
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [OUT_W-1:0]  out_data [DIMS[NUM_LAYERS]]
);

  // ---------------------------------------------------------------- feeder
  typedef enum logic [1:0] {IDLE, READ, PRESENT} feed_state_t;
  feed_state_t      state;
  logic [SLOT_W:0]  slot, count;
  logic             rd_en;
  logic [IN_W-1:0]  sample [DIMS[0]];
  logic             l0_valid, l0_ready;

  assign rd_en    = (state == READ);
  assign l0_valid = (state == PRESENT);
  assign busy     = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      slot  <= '0;
      count <= '0;
    end else begin
      unique case (state)
        IDLE: if (start && num_samples != '0) begin
          slot  <= '0;
          count <= num_samples;
          state <= READ;
        end
        READ: state <= PRESENT;
        PRESENT: if (l0_ready) begin
          slot  <= slot + 1'b1;
          state <= (slot + 1'b1 == count) ? IDLE : READ;
        end
        default: state <= IDLE;
      endcase
    end
  end

  input_bram #(.N(DIMS[0]), .W(IN_W), .DEPTH(DEPTH)) u_bram (
    .clk,
    .wr_en, .wr_slot, .wr_elem, .wr_data,
    .rd_en, .rd_slot(SLOT_W'(slot)), .rd_data(sample)
  );

  // ---------------------------------------------------------------- layers
  logic [NUM_LAYERS:0] lv, lr;   // valid/ready between stages
  assign lv[0]    = l0_valid;
  assign l0_ready = lr[0];

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned XW = (l == 0) ? IN_W : sum_width(BOUT[l-1], DIMS[l-1]);
    localparam int unsigned YW = sum_width(BOUT[l], DIMS[l]);
    logic [XW-1:0] xin  [DIMS[l]];
    logic [YW-1:0] yout [DIMS[l+1]];

    if (l == 0) begin : g_first
      assign xin = sample;
    end else begin : g_next
      assign xin = g_layer[l-1].yout;
    end

    kan_layer #(
      .LAYER(l), .N_IN(DIMS[l]), .N_OUT(DIMS[l+1]), .XW(XW),
      .BIN(BIN[l]), .BOUT(BOUT[l]), .LANES(LANES), .FINE(FINE), .YW(YW)
    ) u_layer (
      .clk, .rst_n,
      .in_valid(lv[l]), .in_ready(lr[l]), .x(xin),
      .out_valid(lv[l+1]), .out_ready(lr[l+1]), .y(yout)
    );
  end

  // --------------------------------------------------- output offset stage
  // Restores the level offsets of the last layer's activation functions.
  assign out_valid       = lv[NUM_LAYERS];
  assign lr[NUM_LAYERS]  = out_ready;
  for (genvar j = 0; j < DIMS[NUM_LAYERS]; j++) begin : g_out
    localparam int OFS = kan_model_pkg::out_offset(j);
    assign out_data[j] = $signed(OUT_W'(g_layer[NUM_LAYERS-1].yout[j])) + OUT_W'(OFS);
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> out_valid);

endmodule
