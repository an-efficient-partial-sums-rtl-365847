// tb_psg_shifter: self-checking test of the (2^m - 1) shifter.
//
// The shifter must move its N/2-1 inputs up by the binary value of its row
// selects, filling with zeros. The expected value is computed with the
// language's shift operator on a vector. Every select pattern is tried on
// a 16-bit-code instance (7 bits, 3 rows) and on a 1024-bit-code instance
// (511 bits, 9 rows), with random data; the thermometer patterns that give
// the 2**m - 1 shifts used in operation are included. A third instance is
// trimmed to 4 rows (constituent codes of at most 16 bits).
module tb_psg_shifter;
  int checks = 0, failures = 0;

  logic [6:0] a16, s16;
  logic [2:0] c16;
  psg_shifter #(.N(16)) u16 (.a(a16), .c(c16), .s(s16));

  logic [510:0] abig, sbig;
  logic [8:0]   cbig;
  psg_shifter #(.N(1024)) ubig (.a(abig), .c(cbig), .s(sbig));

  // trimmed shifter: codes of at most 16 bits, 4 rows
  logic [510:0] at, st;
  logic [3:0]   ct;
  psg_shifter #(.N(1024), .MAX_STAGE(4)) utrim (.a(at), .c(ct), .s(st));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) begin
      for (int t = 0; t < 50; t++) begin
        a16 = 7'($urandom);
        c16 = 3'(c);
        #1;
        checks++;
        if (s16 !== (a16 << c)) begin
          failures++;
          $display("FAIL N=16 c=%0d a=%b s=%b", c, a16, s16);
        end
      end
    end
    for (int c = 0; c < 512; c++) begin
      for (int t = 0; t < 4; t++) begin
        for (int b = 0; b < 511; b++) abig[b] = 1'($urandom);
        cbig = 9'(c);
        #1;
        checks++;
        if (sbig !== (abig << c)) begin
          failures++;
          $display("FAIL N=1024 c=%0d", c);
        end
      end
    end
    for (int c = 0; c < 16; c++) begin
      for (int b = 0; b < 511; b++) at[b] = 1'($urandom);
      ct = 4'(c);
      #1;
      checks++;
      if (st !== (at << c)) begin
        failures++;
        $display("FAIL MAX_STAGE=4 c=%0d", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
