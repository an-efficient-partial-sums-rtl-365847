// tb_control_signal_gen: self-checking test of the control signal generator.
//
// For a 1024-bit code (stages 0..9, 9 shifter rows) and a 16-bit code
// (stages 0..3, 3 rows) it checks that M equals the stage index, that the
// shifter rows encode a shift of 2**stage - 1, and that the update counter
// and the matrix-unit prefetch address behave as specified: frame_start
// reads row 0, each update reads the row of the following update, idle
// cycles read nothing.
module tb_control_signal_gen;
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       fs = 1'b0, valid = 1'b0;
  logic [3:0] stage = '0;
  logic [3:0] m;
  logic [8:0] rows;
  logic       upd_en, rd_en;
  logic [8:0] rd_addr;
  logic [9:0] cnt;

  control_signal_gen #(.N(1024), .DEPTH(512)) dut (
    .clk, .rst_n, .frame_start(fs), .valid, .stage,
    .m, .s_rows(rows), .upd_en, .rom_rd_en(rd_en), .rom_rd_addr(rd_addr),
    .step_cnt(cnt));

  logic       valid16 = 1'b0;
  logic [1:0] stage16 = '0, m16;
  logic [2:0] rows16;
  logic       upd16, rd16;
  logic [3:0] addr16;
  logic [4:0] cnt16;
  control_signal_gen #(.N(16), .DEPTH(16)) dut16 (
    .clk, .rst_n, .frame_start(fs), .valid(valid16), .stage(stage16),
    .m(m16), .s_rows(rows16), .upd_en(upd16), .rom_rd_en(rd16),
    .rom_rd_addr(addr16), .step_cnt(cnt16));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_cnt;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // combinational decode, all stages
    for (int s = 0; s < 10; s++) begin
      stage = 4'(s);
      #1;
      check(m == 4'(s), "M equals stage");
      check(int'(rows) == (1 << s) - 1, "shift rows = 2^s-1 (N=1024)");
    end
    for (int s = 0; s < 4; s++) begin
      stage16 = 2'(s);
      #1;
      check(m16 == 2'(s), "M equals stage (N=16)");
      check(int'(rows16) == (1 << s) - 1, "shift rows = 2^s-1 (N=16)");
    end
    // frame with random gaps
    for (int f = 0; f < 3; f++) begin
      @(negedge clk);
      fs = 1'b1;
      #1;
      check(rd_en && rd_addr == 0, "frame_start reads row 0");
      @(negedge clk);
      fs = 1'b0;
      check(cnt == 0, "counter cleared by frame_start");
      exp_cnt = 0;
      for (int t = 0; t < 300; t++) begin
        valid = 1'($urandom_range(1));
        stage = 4'($urandom_range(9));
        #1;
        check(upd_en == valid, "upd_en follows valid");
        check(rd_en == valid, "read only on update");
        if (valid) check(int'(rd_addr) == exp_cnt + 1, "prefetch next row");
        @(negedge clk);
        if (valid) exp_cnt++;
        check(int'(cnt) == exp_cnt, "update count");
      end
      valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
