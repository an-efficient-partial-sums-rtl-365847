// tb_psg_rates: the generator decoding real (1024, K) polar codes at the
// code rates 0.2, 0.35, 0.5, 0.65 and 0.8, at the default size.
//
// Code construction: Bhattacharyya parameters of a binary erasure channel
// with erasure probability 0.5, propagated down the decoding tree from the
// most significant index bit (left child 2z - z^2, right child z^2); the K
// indices with the smallest parameter carry information, ties going to the
// higher index. The frozen set is then split, left to right, into the
// largest aligned nodes of at most N/2 bits that are rate-0 (all frozen),
// rate-1 (all information), repetition (only the last bit information) or
// single-parity-check (only the first bit frozen); whatever is none of
// these is split further, down to single bits. For each node the test
// draws estimated bits that respect the frozen positions, encodes them into
// partial sums and hands them to the generator at the node's stage; after
// every update all registers are compared with a bit-serial shift-register
// generator fed the same bits. Two frames per rate, back to back, with the
// one-update-per-cycle rate checked; the update count of each rate must fit
// the matrix unit. A length-2 node with only its second bit information is
// both a repetition and a parity node and is counted as repetition.
module tb_psg_rates;
  import psg_ref_pkg::*;

  localparam int NT = psg_pkg::PSG_N;
  localparam int DT = psg_pkg::PSG_DEPTH;
  localparam int W   = NT / 2;
  localparam int NST = $clog2(NT);
  localparam int SW  = $clog2(NST);
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

  bit info [NT];
  int n_rate0 = 0, n_rate1 = 0, n_rep = 0, n_spc = 0, n_bit = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  task automatic construct(input int k);
    real z [NT];
    for (int i = 0; i < NT; i++) begin
      z[i] = 0.5;
      for (int b = NST - 1; b >= 0; b--)
        z[i] = ((i >> b) & 1) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
    end
    for (int i = 0; i < NT; i++) begin
      int rank = 0;
      for (int j = 0; j < NT; j++)
        if (z[j] < z[i] || (z[j] == z[i] && j > i)) rank++;
      info[i] = rank < k;
    end
  endtask

  // 0 none, 1 rate-0, 2 rate-1, 3 repetition, 4 single parity check
  function automatic int node_kind(input int p, input int L);
    int ninfo = 0;
    for (int a = 0; a < L; a++) ninfo += int'(info[p + a]);
    if (ninfo == 0) return 1;
    if (ninfo == L) return 2;
    if (ninfo == 1 && info[p + L - 1]) return 3;
    if (ninfo == L - 1 && !info[p]) return 4;
    return 0;
  endfunction

  task automatic split(output int lens[$]);
    int p = 0;
    lens = {};
    while (p < NT) begin
      int L = 1;
      for (int s = NST - 1; s >= 1; s--)
        if (p % (1 << s) == 0 && node_kind(p, 1 << s) != 0) begin L = 1 << s; break; end
      case (node_kind(p, L))
        1: if (L > 1) n_rate0++; else n_bit++;
        2: if (L > 1) n_rate1++; else n_bit++;
        3: n_rep++;
        4: n_spc++;
        default: ;
      endcase
      lens.push_back(L);
      p += L;
    end
  endtask

  task automatic run_rate(input real rate);
    int lens[$];
    int k;
    k = int'(rate * NT);
    construct(k);
    split(lens);
    begin
      int lmax = 0;
      foreach (lens[n]) if (lens[n] > lmax) lmax = lens[n];
      $display("rate %0.2f: K=%0d, %0d updates per frame, longest node %0d bits",
               rate, k, lens.size(), lmax);
    end
    check(lens.size() <= DT, "updates fit the matrix unit");
    begin
      int q = 0;
      foreach (lens[n]) begin
        @(negedge clk);
        cfg_we = 1'b1;
        cfg_addr = AW'(n);
        for (int c = 0; c < W; c++) cfg_row[c] = gen_bit(q + lens[n] - 1, c);
        q += lens[n];
      end
      @(negedge clk);
      cfg_we = 1'b0;
    end
    repeat (2) begin
      regs_t ref_r = '0;
      int p = 0, t0;
      @(negedge clk);
      frame_start = 1'b1;
      @(negedge clk);
      frame_start = 1'b0;
      @(negedge clk);
      t0 = $time;
      foreach (lens[n]) begin
        int L;
        regs_t u, b;
        L = lens[n];
        u = '0;
        for (int a = 0; a < L; a++) u[a] = info[p + a] ? 1'($urandom) : 1'b0;
        b = encode(u, L);
        for (int x = 0; x < NT - 1; x++) pu_psum[x] = 1'($urandom);
        for (int j = 0; j < L; j++) pu_psum[L - 1 + j] = b[j];
        valid = 1'b1;
        stage = SW'($clog2(L));
        for (int a = 0; a < L; a++) ref_r = serial_update(ref_r, u[a], p + a, W);
        p += L;
        @(negedge clk);
        check(psum == ref_r[W-1:0], $sformatf("rate %0.2f node at %0d, L=%0d", rate, p - L, L));
      end
      valid = 1'b0;
      check(int'(step_cnt) == lens.size(), "update count");
      check(($time - t0) / 10 == lens.size(), "one update per cycle");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_rate(0.2);
    run_rate(0.35);
    run_rate(0.5);
    run_rate(0.65);
    run_rate(0.8);
    $display("nodes: rate-0 %0d, rate-1 %0d, repetition %0d, parity %0d, single bits %0d",
             n_rate0, n_rate1, n_rep, n_spc, n_bit);
    // With this construction every length-2 node is special, so single bits
    // do not occur here; the single-bit path is exercised by tb_sr_cb_psg.
    check(n_rate0 > 0 && n_rate1 > 0 && n_rep > 0 && n_spc > 0,
          "every node type occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
