// tb_kan_accel -- end-to-end test of the accelerator at a reduced size:
// a (5, 4, 3, 2) network, 12-bit raw inputs, LUT input widths 7/4/3 (the
// 7-bit pools are split into partitions), output widths 5/4/3, fine-grained
// per-edge widths, 2 accumulator lanes, 4 RAM slots.
//
// The host side writes random samples into the RAM element by element,
// starts a run, and takes the results under random back-pressure; a second
// run reuses the RAM with new contents.  Every result is compared with the
// integer reference model (quantize, look up, sum, per layer; then the output
// offsets).  The latency of the first sample of a run is checked against
// 2 + sum over layers of (3 + ceil(n_l/2)) + (layers - 1).  The test also
// counts how often each mechanism happened -- index clamping low and high,
// narrowed edges, split LUT pools, multi-cycle accumulation, pipeline stalls
// from output back-pressure, several samples in flight -- and fails if one
// never did.
module tb_kan_accel;
  localparam int unsigned L = 3;
  localparam int unsigned DIMS [L+1] = '{5, 4, 3, 2};
  localparam int unsigned IN_W = 12;
  localparam int unsigned BIN  [L] = '{7, 4, 3};
  localparam int unsigned BOUT [L] = '{5, 4, 3};
  localparam int unsigned LANES = 2, DEPTH = 4;
  localparam int unsigned YW_L = kan_pkg::sum_width(BOUT[L-1], DIMS[L-1]);
  localparam int unsigned OUT_W = ((YW_L > 9) ? YW_L : 9) + 1;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [1:0] wr_slot = 0;
  logic [2:0] wr_elem = 0;
  logic [IN_W-1:0] wr_data = 0;
  logic start = 0;
  logic [2:0] num_samples = 0;
  logic busy, out_valid, out_ready;
  logic signed [OUT_W-1:0] out_data [DIMS[L]];

  int checks = 0, failures = 0, cycle = 0;
  longint exp_q [$][];
  int n_stall = 0, n_multi_acc = 0, n_in_flight = 0;

  kan_accel #(.NUM_LAYERS(L), .DIMS(DIMS), .IN_W(IN_W), .BIN(BIN), .BOUT(BOUT),
              .LANES(LANES), .FINE(1'b1), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // number of layers that currently hold a sample somewhere in their pipeline
  function automatic int layers_holding();
    int n = 0;
    if (dut.g_layer[0].u_layer.v1 || dut.g_layer[0].u_layer.v2 || dut.g_layer[0].u_layer.v3 ||
        dut.g_layer[0].u_layer.g_acc[0].u_acc.busy || dut.lv[1]) n++;
    if (dut.g_layer[1].u_layer.v1 || dut.g_layer[1].u_layer.v2 || dut.g_layer[1].u_layer.v3 ||
        dut.g_layer[1].u_layer.g_acc[0].u_acc.busy || dut.lv[2]) n++;
    if (dut.g_layer[2].u_layer.v1 || dut.g_layer[2].u_layer.v2 || dut.g_layer[2].u_layer.v3 ||
        dut.g_layer[2].u_layer.g_acc[0].u_acc.busy || dut.lv[3]) n++;
    return n;
  endfunction

  function automatic void reference(const ref longint x[], ref longint y[]);
    longint a [], b [];
    a = x;
    for (int unsigned l = 0; l < L; l++) begin
      int unsigned xw;
      xw = (l == 0) ? IN_W : kan_pkg::sum_width(BOUT[l-1], DIMS[l-1]);
      kan_ref_pkg::layer(l, xw, BIN[l], BOUT[l], 1'b1, DIMS[l], DIMS[l+1], a, b);
      a = b;
    end
    y = new[DIMS[L]];
    foreach (y[j]) y[j] = a[j] + longint'(kan_model_pkg::out_offset(j));
  endfunction

  task automatic load_and_run(input int n, input bit stall_out);
    int cs, lat_exp, got;
    bit lat_done = 0;
    for (int s = 0; s < n; s++) begin
      longint xv [], yv [];
      xv = new[DIMS[0]];
      for (int e = 0; e < int'(DIMS[0]); e++) begin
        @(negedge clk);
        wr_en = 1; wr_slot = 2'(s); wr_elem = 3'(e);
        wr_data = IN_W'($urandom);
        xv[e] = longint'(wr_data);
      end
      reference(xv, yv);
      exp_q.push_back(yv);
    end
    @(negedge clk);
    wr_en = 0; start = 1; num_samples = 3'(n);
    @(negedge clk);
    start = 0;
    cs = cycle;
    lat_exp = 2 + int'(L) - 1;
    for (int unsigned l = 0; l < L; l++) lat_exp += 3 + int'((DIMS[l] + LANES - 1) / LANES);
    got = 0;
    out_ready = 1;
    while (got < n) begin
      if (out_valid && got == 0 && !lat_done) begin
        lat_done = 1;
        checks++;
        if (cycle - cs != lat_exp) begin
          failures++;
          $display("FAIL latency %0d != %0d", cycle - cs, lat_exp);
        end
      end
      if (out_valid && out_ready) begin
        longint e [];
        e = exp_q.pop_front();
        for (int j = 0; j < int'(DIMS[L]); j++) begin
          checks++;
          if (longint'(out_data[j]) != e[j]) begin
            failures++;
            $display("FAIL sample %0d out[%0d]=%0d exp=%0d", got, j, out_data[j], e[j]);
          end
        end
        got++;
      end
      if (out_valid && !out_ready) n_stall++;
      // count samples in flight in different layers
      if (layers_holding() >= 2) n_in_flight++;
      if (dut.g_layer[0].u_layer.g_acc[0].u_acc.busy && !dut.g_layer[0].u_layer.g_acc[0].u_acc.last)
        n_multi_acc++;
      @(negedge clk);
      out_ready = stall_out ? (($urandom % 3) == 0) : 1'b1;
    end
    checks++;
    if (busy) begin
      failures++;
      $display("FAIL still busy");
    end
  endtask

  initial begin
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_and_run(4, 1'b0);
    load_and_run(3, 1'b1);
    load_and_run(4, 1'b1);
    $display("clamp_lo=%0d clamp_hi=%0d fine_edges=%0d split_lookups=%0d multi_acc=%0d stalls=%0d in_flight=%0d",
             kan_ref_pkg::n_clamp_lo, kan_ref_pkg::n_clamp_hi, kan_ref_pkg::n_fine_edges,
             kan_ref_pkg::n_split_lookups, n_multi_acc, n_stall, n_in_flight);
    if (kan_ref_pkg::n_clamp_lo == 0)      begin failures++; $display("FAIL no low clamp"); end
    if (kan_ref_pkg::n_clamp_hi == 0)      begin failures++; $display("FAIL no high clamp"); end
    if (kan_ref_pkg::n_fine_edges == 0)    begin failures++; $display("FAIL no narrowed edge"); end
    if (kan_ref_pkg::n_split_lookups == 0) begin failures++; $display("FAIL no split pool"); end
    if (n_multi_acc == 0)                  begin failures++; $display("FAIL no multi-cycle sum"); end
    if (n_stall == 0)                      begin failures++; $display("FAIL no back-pressure"); end
    if (n_in_flight == 0)                  begin failures++; $display("FAIL no overlap"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
