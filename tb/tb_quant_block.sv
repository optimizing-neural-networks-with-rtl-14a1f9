// tb_quant_block -- checks the precision conversion of quant_block against an
// integer reference: the worked example of a 9-bit value 450 scaled by
// alpha = 0b101 with 8 fractional bits (expected index 9), then random
// values, scales, radix positions and offsets, including both clamps, the
// two-cycle latency and the hold under en = 0.
module tb_quant_block;
  import kan_pkg::*;

  localparam int unsigned XW  = 16;
  localparam int unsigned BIN = 4;

  logic clk = 0, en;
  logic [XW-1:0] x;
  logic [ALPHA_W-1:0] alpha;
  logic [FRAC_W-1:0] frac;
  logic signed [BETA_W-1:0] beta;
  logic [BIN-1:0] idx;
  int checks = 0, failures = 0;
  int n_lo = 0, n_hi = 0;

  quant_block #(.XW(XW), .BIN(BIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint xv, input longint av, input int fv,
                       input longint bv);
    longint exp;
    int lo0, hi0;
    lo0 = kan_ref_pkg::n_clamp_lo; hi0 = kan_ref_pkg::n_clamp_hi;
    exp = kan_ref_pkg::quant(xv, av, fv, bv, BIN);
    n_lo += kan_ref_pkg::n_clamp_lo - lo0;
    n_hi += kan_ref_pkg::n_clamp_hi - hi0;
    @(negedge clk);
    x = XW'(xv); alpha = ALPHA_W'(av); frac = FRAC_W'(fv); beta = BETA_W'(bv);
    en = 1;
    @(negedge clk);             // after cycle 1: product registered
    x = ~x;                     // must not matter any more
    @(negedge clk);             // after cycle 2: index registered
    checks++;
    if (longint'(idx) != exp) begin
      failures++;
      $display("FAIL x=%0d a=%0d f=%0d b=%0d idx=%0d exp=%0d", xv, av, fv, bv, idx, exp);
    end
    // hold: with en low the index must not change
    en = 0; x = XW'($urandom);
    @(negedge clk);
    checks++;
    if (longint'(idx) != exp) begin
      failures++;
      $display("FAIL hold idx=%0d exp=%0d", idx, exp);
    end
  endtask

  initial begin
    en = 0; x = 0; alpha = 0; frac = 0; beta = 0;
    // worked example: 450 * 0.00000101b = 8.79 -> 9
    check(450, 5, 8, 0);
    checks++;
    if (idx != 4'd9) failures++;
    for (int t = 0; t < 2000; t++) begin
      longint xv, av, bv;
      int fv;
      xv = longint'($urandom & 16'hFFFF);
      av = longint'($urandom & 16'hFFFF) >> ($urandom % 12);
      fv = 8 + int'($urandom % 20);
      bv = longint'(signed'($urandom)) >>> (4 + $urandom % 8);
      check(xv, av, fv, bv);
    end
    checks++;
    if (n_lo == 0 || n_hi == 0) begin
      failures++;
      $display("FAIL clamps not exercised lo=%0d hi=%0d", n_lo, n_hi);
    end
    $display("clamp_lo=%0d clamp_hi=%0d", n_lo, n_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
