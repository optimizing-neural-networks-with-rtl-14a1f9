// tb_kan_layer -- a 3-input, 2-output layer with 7-bit LUT inputs (pools
// split into two 64-entry partitions), 5-bit outputs, fine-grained per-edge
// widths and 2 accumulator lanes.  Random samples go in under random input
// gaps and output back-pressure; every output neuron is checked against the
// integer reference model, and the latency of an unobstructed sample is
// checked to be 3 + ceil(3/2) = 5 cycles.
module tb_kan_layer;
  localparam int unsigned LAYER = 1, N_IN = 3, N_OUT = 2, XW = 10;
  localparam int unsigned BIN = 7, BOUT = 5, LANES = 2;
  localparam int unsigned YW = kan_pkg::sum_width(BOUT, N_IN);
  localparam int LAT = 3 + (N_IN + LANES - 1) / LANES;
  localparam int TOTAL = 200;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [XW-1:0] x [N_IN];
  logic [YW-1:0] y [N_OUT];
  int checks = 0, failures = 0, cycle = 0, sent = 0, got = 0;
  int n_stall_in = 0, n_stall_out = 0;
  longint exp_q [$][];
  int cyc_q [$];

  kan_layer #(.LAYER(LAYER), .N_IN(N_IN), .N_OUT(N_OUT), .XW(XW), .BIN(BIN),
              .BOUT(BOUT), .LANES(LANES), .FINE(1'b1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < TOTAL) begin
      @(negedge clk);
      if (!in_valid) begin
        in_valid = ($urandom % 3) != 0;
        if (in_valid) foreach (x[i]) x[i] = XW'($urandom);
      end
      @(posedge clk);
      if (in_valid && !in_ready) n_stall_in++;
      if (in_valid && in_ready) begin
        longint xv [], yv [];
        xv = new[N_IN];
        foreach (x[i]) xv[i] = longint'(x[i]);
        kan_ref_pkg::layer(LAYER, XW, BIN, BOUT, 1'b1, N_IN, N_OUT, xv, yv);
        exp_q.push_back(yv);
        cyc_q.push_back(cycle);
        sent++;
        #1 in_valid = 0;
      end
    end
  end

  logic prev_ov = 0;
  initial begin
    out_ready = 0;
    while (got < TOTAL) begin
      @(negedge clk);
      out_ready = (sent < 20) ? 1'b1 : (($urandom % 3) != 0);
      @(posedge clk);
      if (out_valid && !out_ready) n_stall_out++;
      if (out_valid && !prev_ov && got < 10 && sent <= got + 1) begin
        // first samples, nothing ahead of them: exact latency
        checks++;
        if (cycle - cyc_q[0] != LAT) begin
          failures++;
          $display("FAIL latency %0d != %0d", cycle - cyc_q[0], LAT);
        end
      end
      prev_ov = out_valid && !out_ready;
      if (out_valid && out_ready) begin
        longint e [];
        e = exp_q.pop_front();
        void'(cyc_q.pop_front());
        for (int j = 0; j < N_OUT; j++) begin
          checks++;
          if (longint'(y[j]) != e[j]) begin
            failures++;
            $display("FAIL sample %0d y[%0d]=%0d exp=%0d", got, j, y[j], e[j]);
          end
        end
        got++;
      end
    end
    checks++;
    if (n_stall_in == 0 || n_stall_out == 0 || kan_ref_pkg::n_clamp_lo == 0 ||
        kan_ref_pkg::n_clamp_hi == 0 || kan_ref_pkg::n_fine_edges == 0 ||
        kan_ref_pkg::n_split_lookups == 0) begin
      failures++;
      $display("FAIL mechanism missing");
    end
    $display("in_stalls=%0d out_stalls=%0d clamp_lo=%0d clamp_hi=%0d fine=%0d split=%0d",
             n_stall_in, n_stall_out, kan_ref_pkg::n_clamp_lo, kan_ref_pkg::n_clamp_hi,
             kan_ref_pkg::n_fine_edges, kan_ref_pkg::n_split_lookups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
