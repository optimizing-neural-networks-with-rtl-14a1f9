// tb_input_bram -- fills a 4-slot, 6-element RAM with random values, one
// element per write, then reads every slot back as a whole sample and checks
// the synchronous read (data one cycle after rd_en, held while rd_en is low).
module tb_input_bram;
  localparam int N = 6, W = 12, DEPTH = 4;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [1:0] wr_slot = 0, rd_slot = 0;
  logic [2:0] wr_elem = 0;
  logic [W-1:0] wr_data = 0;
  logic [W-1:0] rd_data [N];
  logic [W-1:0] ref_mem [DEPTH][N];
  int checks = 0, failures = 0;

  input_bram #(.N(N), .W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int s = 0; s < DEPTH; s++)
        for (int e = 0; e < N; e++) begin
          @(negedge clk);
          wr_en = 1; wr_slot = 2'(s); wr_elem = 3'(e); wr_data = W'($urandom);
          ref_mem[s][e] = wr_data;
        end
      @(negedge clk) wr_en = 0;
      for (int s = DEPTH - 1; s >= 0; s--) begin
        @(negedge clk);
        rd_en = 1; rd_slot = 2'(s);
        @(negedge clk);
        rd_en = 0; rd_slot = 2'(s + 1);
        for (int e = 0; e < N; e++) begin
          checks++;
          if (rd_data[e] != ref_mem[s][e]) begin
            failures++;
            $display("FAIL slot %0d elem %0d: %h != %h", s, e, rd_data[e], ref_mem[s][e]);
          end
        end
        @(negedge clk);       // held while rd_en is low
        for (int e = 0; e < N; e++) begin
          checks++;
          if (rd_data[e] != ref_mem[s][e]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
