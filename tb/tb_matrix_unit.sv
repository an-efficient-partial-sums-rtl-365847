// tb_matrix_unit: self-checking test of the matrix-unit memory.
//
// Fills every row of a 1024-bit-code, 512-row instance with random data
// through the write port, keeps a copy in the testbench, then reads rows
// back in random order and checks the one-cycle read latency and that the
// output holds while rd_en is low.
module tb_matrix_unit;
  localparam int N = 1024, DEPTH = 512, W = N / 2;
  int checks = 0, failures = 0;

  logic         clk = 1'b0;
  logic         wr_en = 1'b0, rd_en = 1'b0;
  logic [8:0]   wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] model [DEPTH];

  matrix_unit #(.N(N), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      for (int b = 0; b < W; b++) model[a][b] = 1'($urandom);
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 9'(a); wr_data = model[a];
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int t = 0; t < 2000; t++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      rd_en = 1'b1; rd_addr = 9'(a);
      @(negedge clk);
      rd_en = 1'b0; rd_addr = 9'($urandom);
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        $display("FAIL read row %0d", a);
      end
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        $display("FAIL row %0d not held", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
