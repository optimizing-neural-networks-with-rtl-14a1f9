// tb_kan_accel_mnist_tail -- the last two layers of the MNIST network at
// their real size: a (64, 32, 10) accelerator with 4-bit LUT inputs, 5-bit
// LUT outputs, fine-grained per-edge widths and 2 accumulator lanes
// (2,368 edges).  The 64 inputs are 15-bit values, the width of the first
// MNIST layer's sums.
//
// One random sample is written into the input RAM and run; all ten results
// are compared with the integer reference model, and the latency from start
// to the result is checked against 2 + (3 + 32) + (3 + 16) + 1 = 57 cycles.
module tb_kan_accel_mnist_tail;
  localparam int unsigned L = 2;
  localparam int unsigned DIMS [L+1] = '{64, 32, 10};
  localparam int unsigned IN_W = 15;
  localparam int unsigned BIN  [L] = '{4, 4};
  localparam int unsigned BOUT [L] = '{5, 5};
  localparam int unsigned LANES = 2;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [3:0] wr_slot = 0;
  logic [5:0] wr_elem = 0;
  logic [IN_W-1:0] wr_data = 0;
  logic start = 0;
  logic [4:0] num_samples = 0;
  logic busy, out_valid, out_ready;
  logic signed [10:0] out_data [10];

  int checks = 0, failures = 0, cycle = 0;

  kan_accel #(.NUM_LAYERS(L), .DIMS(DIMS), .IN_W(IN_W), .BIN(BIN), .BOUT(BOUT),
              .LANES(LANES), .FINE(1'b1), .DEPTH(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a [], b [];
    int cs, lat_exp;
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    a = new[DIMS[0]];
    for (int e = 0; e < int'(DIMS[0]); e++) begin
      @(negedge clk);
      wr_en = 1; wr_slot = 4'd0; wr_elem = 6'(e);
      wr_data = IN_W'($urandom);
      a[e] = longint'(wr_data);
    end
    for (int unsigned l = 0; l < L; l++) begin
      int unsigned xw;
      xw = (l == 0) ? IN_W : kan_pkg::sum_width(BOUT[l-1], DIMS[l-1]);
      kan_ref_pkg::layer(l, xw, BIN[l], BOUT[l], 1'b1, DIMS[l], DIMS[l+1], a, b);
      a = b;
    end
    @(negedge clk);
    wr_en = 0; start = 1; num_samples = 5'd1;
    @(negedge clk);
    start = 0;
    cs = cycle;
    lat_exp = 2 + int'(L) - 1;
    for (int unsigned l = 0; l < L; l++) lat_exp += 3 + int'((DIMS[l] + LANES - 1) / LANES);
    while (!out_valid) @(negedge clk);
    checks++;
    if (cycle - cs != lat_exp) begin
      failures++;
      $display("FAIL latency %0d != %0d", cycle - cs, lat_exp);
    end
    $display("latency %0d cycles = %0d ns at 100 MHz", cycle - cs, (cycle - cs) * 10);
    for (int j = 0; j < 10; j++) begin
      longint e;
      e = a[j] + longint'(kan_model_pkg::out_offset(j));
      checks++;
      if (longint'(out_data[j]) != e) begin
        failures++;
        $display("FAIL out[%0d]=%0d exp=%0d", j, out_data[j], e);
      end
    end
    $display("clamp_lo=%0d clamp_hi=%0d fine_edges=%0d", kan_ref_pkg::n_clamp_lo,
             kan_ref_pkg::n_clamp_hi, kan_ref_pkg::n_fine_edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
