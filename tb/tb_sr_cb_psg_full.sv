// tb_sr_cb_psg_full: the end-to-end test of tb_sr_cb_psg at the default size
// (1024-bit code, 512 matrix-unit rows, codes up to 512 bits), with the
// generator instantiated without parameter overrides. A 1024-bit frame
// cannot be purely bit-serial, since it would need 1024 rows; the rest is
// as below.
//
// Each frame splits the code into aligned constituent codes of random
// lengths 2**s (single bits included), as a constituent-code decoder would
// resolve them left to right. For every node the test draws the estimated
// bits, encodes them into partial sums, puts those on the PU bus slot of
// stage s (all other slots carry random data), and after the update
// compares all N/2 registers with a bit-serial shift-register generator
// fed the same bits one at a time. The matrix unit is loaded with the row
// of G for the last bit of each node before the frame. Frames alternate
// between back-to-back updates, whose cycle count is checked (one update
// per cycle), and updates with random idle cycles, where the registers
// must hold. One frame per run is purely bit-serial where the memory
// allows it. Counted mechanisms, each of which must occur: every stage
// index, single-bit updates, the longest code (N/2), idle cycles, and a
// frame_start that clears registers left from a previous frame.
module tb_sr_cb_psg_full;
  import psg_ref_pkg::*;

  localparam int NT = psg_pkg::PSG_N;      // code length under test
  localparam int DT = psg_pkg::PSG_DEPTH;  // matrix-unit rows
  localparam int FRAMES = 30;
  localparam int MS = $clog2(NT) - 1;   // largest stage (code length 2**MS)

  localparam int W   = NT / 2;
  localparam int NST = $clog2(NT);
  localparam int SW  = $clog2(MS + 1);
  localparam int AW  = $clog2(DT);
  localparam int CW  = $clog2(DT + 1);

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          cfg_we = 1'b0;
  logic [AW-1:0] cfg_addr = '0;
  logic [W-1:0]  cfg_row = '0;
  logic          frame_start = 1'b0, valid = 1'b0;
  logic [SW-1:0] stage = '0;
  logic [NT-2:0] pu_psum = '0;
  logic [W-1:0]  psum;
  logic [CW-1:0] step_cnt;

  sr_cb_psg dut (.*);

  // mechanism counters
  int stage_hits [MS + 1];
  int n_single = 0, n_longest = 0, n_idle = 0, n_clear = 0, n_b2b = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // Split [0, NT) into aligned power-of-two nodes of at most 2**MS bits.
  // mode 0: random, mode 1: single bits only, mode 2: largest nodes only.
  task automatic make_frame(input int mode, output int lens[$]);
    int p = 0;
    lens = {};
    while (p < NT) begin
      int sm, s;
      sm = MS;
      for (int t = 0; t < MS; t++)
        if (p % (1 << (t + 1)) != 0) begin sm = t; break; end
      if (mode == 1) s = 0;
      else if (mode == 2) s = sm;
      else if (DT - lens.size() <= NT / (1 << MS) + NST) s = sm;
      else if ($urandom_range(1)) s = sm;
      else s = $urandom_range(sm);
      lens.push_back(1 << s);
      p += 1 << s;
    end
  endtask

  task automatic run_frame(input int mode, input bit gaps);
    int lens[$];
    regs_t ref_r = '0;
    int p = 0;
    int t0;
    make_frame(mode, lens);
    // load the matrix rows of this frame, in update order
    begin
      int q = 0;
      foreach (lens[n]) begin
        int i;
        i = q + lens[n] - 1;
        @(negedge clk);
        cfg_we = 1'b1;
        cfg_addr = AW'(n);
        for (int k = 0; k < W; k++) cfg_row[k] = gen_bit(i, k);
        q += lens[n];
      end
      @(negedge clk);
      cfg_we = 1'b0;
    end
    @(negedge clk);
    frame_start = 1'b1;
    @(negedge clk);
    frame_start = 1'b0;
    check(psum == '0, "registers cleared by frame_start");
    n_clear++;
    @(negedge clk);               // one idle cycle for the first row
    t0 = $time;
    foreach (lens[n]) begin
      int L, s;
      regs_t u, b;
      L = lens[n];
      s = $clog2(L);
      if (gaps) begin
        int g;
        g = $urandom_range(2);
        repeat (g) begin
          valid = 1'b0;
          for (int x = 0; x < NT - 1; x++) pu_psum[x] = 1'($urandom);
          @(negedge clk);
          check(psum == ref_r[W-1:0], "registers hold while idle");
          n_idle++;
        end
      end
      u = '0;
      for (int a = 0; a < L; a++) u[a] = 1'($urandom);
      b = encode(u, L);
      for (int x = 0; x < NT - 1; x++) pu_psum[x] = 1'($urandom);
      for (int j = 0; j < L; j++) pu_psum[L - 1 + j] = b[j];
      valid = 1'b1;
      stage = SW'(s);
      for (int a = 0; a < L; a++) ref_r = serial_update(ref_r, u[a], p + a, W);
      p += L;
      stage_hits[s]++;
      if (L == 1) n_single++;
      if (L == (1 << MS)) n_longest++;
      @(negedge clk);
      check(psum == ref_r[W-1:0], $sformatf("registers after node at %0d, L=%0d", p - L, L));
    end
    valid = 1'b0;
    check(int'(step_cnt) == lens.size(), "update count");
    if (!gaps) begin
      // one update per clock cycle: the last result is visible lens.size() cycles on
      check(($time - t0) / 10 == lens.size(), "one update per cycle");
      n_b2b++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(psum == '0, "registers cleared by reset");
    run_frame(2, 1'b0);
    if (DT >= NT) run_frame(1, 1'b1);
    for (int f = 0; f < FRAMES; f++) run_frame(0, f[0]);
    // mechanisms
    for (int s = 0; s <= MS; s++) check(stage_hits[s] > 0, $sformatf("stage %0d used", s));
    check(n_single > 0, "single-bit updates");
    check(n_longest > 0, "longest constituent code");
    check(n_idle > 0 || FRAMES < 2, "idle cycles");
    check(n_clear > 1, "frame restart");
    check(n_b2b > 0, "back-to-back frame");
    $display("mechanisms: single=%0d longest=%0d idle=%0d frames=%0d back-to-back=%0d",
             n_single, n_longest, n_idle, n_clear, n_b2b);
    for (int s = 0; s <= MS; s++) $display("  stage %0d: %0d updates", s, stage_hits[s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
