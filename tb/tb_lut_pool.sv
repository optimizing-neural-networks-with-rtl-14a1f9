// tb_lut_pool -- checks a LUT pool wider than one fundamental LUT (8 input
// bits: four 64-entry partitions per output bit) and a narrow one (3 bits)
// against random truth tables, every index, with the one-cycle latency and
// the hold under en = 0.
module tb_lut_pool;
  logic clk = 0, en;
  int checks = 0, failures = 0;

  logic [7:0] idx_a;
  logic [4:0][255:0] truth_a;
  logic [4:0] y_a;
  logic [2:0] idx_b;
  logic [1:0][7:0] truth_b;
  logic [1:0] y_b;

  lut_pool #(.BIN(8), .BOUT(5)) dut_a (.clk, .en, .idx(idx_a), .truth(truth_a), .y(y_a));
  lut_pool #(.BIN(3), .BOUT(2)) dut_b (.clk, .en, .idx(idx_b), .truth(truth_b), .y(y_b));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table value as an integer
  function automatic int unsigned val_a(int unsigned a);
    int unsigned v = 0;
    for (int b = 0; b < 5; b++) v |= int'(truth_a[b][a]) << b;
    return v;
  endfunction

  initial begin
    en = 0; idx_a = 0; idx_b = 0;
    for (int b = 0; b < 5; b++)
      for (int w = 0; w < 8; w++) truth_a[b][w*32 +: 32] = $urandom;
    for (int b = 0; b < 2; b++) truth_b[b] = 8'($urandom);
    for (int rep = 0; rep < 2; rep++) begin
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        idx_a = 8'(a); idx_b = 3'(a); en = 1;
        @(negedge clk);
        en = 0;
        checks++;
        if (int'(y_a) != int'(val_a(a))) begin
          failures++;
          $display("FAIL a idx=%0d y=%0d exp=%0d", a, y_a, val_a(a));
        end
        checks++;
        if (y_b != {truth_b[1][a%8], truth_b[0][a%8]}) begin
          failures++;
          $display("FAIL b idx=%0d", a);
        end
        idx_a = ~idx_a;   // held output must not follow while en = 0
        @(negedge clk);
        checks++;
        if (int'(y_a) != int'(val_a(a))) failures++;
      end
      for (int b = 0; b < 5; b++)
        for (int w = 0; w < 8; w++) truth_a[b][w*32 +: 32] = $urandom;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
