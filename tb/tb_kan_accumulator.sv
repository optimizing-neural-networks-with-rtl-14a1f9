// tb_kan_accumulator -- sends random term vectors through a 7-term, 2-lane
// accumulator (4 summing cycles per sample) under random output
// back-pressure.  Checks every sum against an independent sum, the
// 4-cycle latency from input handshake to out_valid, the holding of a result
// while out_ready is low, and back-to-back acceptance.
module tb_kan_accumulator;
  localparam int N = 7, W = 5, LANES = 2, STEPS = 4, SW = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] terms [N];
  logic [SW-1:0] sum;
  int checks = 0, failures = 0;
  int exp_q [$];
  int acc_cycle [$];
  int cycle = 0;
  int n_stall = 0, n_b2b = 0, sent = 0, got = 0;
  localparam int TOTAL = 300;

  kan_accumulator #(.N(N), .W(W), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver: new terms whenever the previous ones were taken
  logic took = 0;
  initial begin
    in_valid = 0;
    foreach (terms[n]) terms[n] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < TOTAL) begin
      @(negedge clk);
      if (took) begin in_valid = 0; took = 0; end
      if (!in_valid && sent + (in_valid ? 1 : 0) < TOTAL) begin
        in_valid = ($urandom % 4) != 0;
        if (in_valid) foreach (terms[n]) terms[n] = W'($urandom);
      end
    end
    @(negedge clk) in_valid = 0;
  end

  // input handshake monitor
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      automatic int s = 0;
      foreach (terms[n]) s += int'(terms[n]);
      exp_q.push_back(s);
      acc_cycle.push_back(cycle);
      if (dut.busy) n_b2b++;
      sent++;
      took <= 1;
    end
  end

  // monitor
  logic prev_stall = 0;
  logic [SW-1:0] prev_sum;
  initial begin
    out_ready = 0;
    while (got < TOTAL) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
      @(posedge clk);
      if (prev_stall) begin
        checks++;
        if (!out_valid || sum != prev_sum) begin failures++; $display("FAIL hold"); end
      end
      prev_stall = out_valid && !out_ready;
      prev_sum = sum;
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        automatic int e = exp_q.pop_front();
        automatic int c = acc_cycle.pop_front();
        checks++;
        if (int'(sum) != e) begin
          failures++;
          $display("FAIL sum=%0d exp=%0d", sum, e);
        end
        checks++;
        if (cycle - c < STEPS) begin
          failures++;
          $display("FAIL latency %0d < %0d", cycle - c, STEPS);
        end
        got++;
      end
    end
    checks++;
    if (n_stall == 0 || n_b2b == 0) begin
      failures++;
      $display("FAIL mechanisms: stalls=%0d back_to_back=%0d", n_stall, n_b2b);
    end
    $display("stalls=%0d back_to_back=%0d", n_stall, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exact latency: with the output free, out_valid rises STEPS cycles after
  // the handshake
  int lat_start = -1;
  logic prev_ov = 0;
  always @(posedge clk) begin
    prev_ov <= out_valid;
    if (rst_n && in_valid && in_ready && !dut.busy && !out_valid) lat_start <= cycle;
    if (rst_n && out_valid && !prev_ov && lat_start >= 0) begin
      checks++;
      // out_valid is seen here one edge after it rose
      if (cycle - lat_start != STEPS + 1) begin
        failures++;
        $display("FAIL exact latency %0d at %0d ov=%0d", cycle - lat_start, cycle, out_valid);
      end
      lat_start <= -1;
    end
  end
endmodule
