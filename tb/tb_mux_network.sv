// tb_mux_network: self-checking test of the multiplexing network.
//
// Two instances. The 8-bit one is checked against the published routing
// table for an 8-bit code: R_0 <- PU_{0,0}, PU_{1,1}, PU_{2,3};
// R_1 <- PU_{0,0}, PU_{1,0}, PU_{2,2}; R_2 <- PU_{0,0}, PU_{1,1}, PU_{2,1};
// R_3 <- PU_{0,0}, PU_{1,0}, PU_{2,0}, written out literally below. The
// 1024-bit one is checked against the rule "register k takes
// beta_{L-1-(k mod L)} of the length-L code" with one-hot PU patterns, so
// that a wrong source shows up as a missing or a stray one. Out-of-range
// stage indices must route zeros. A 64-bit instance trimmed to codes of at
// most 4 bits must route stages 0..2 and zeros for stage 3.
module tb_mux_network;
  int checks = 0, failures = 0;

  // ---------------- 8-bit instance against the routing table
  logic [6:0] pu8;
  logic [1:0] m8;
  logic [3:0] beta8;
  mux_network #(.N(8)) u8 (.pu_psum(pu8), .m(m8), .beta(beta8));

  // PU_{s,j} on the flat bus: stage 0 at bit 0, stage 1 at bits 1..2,
  // stage 2 at bits 3..6.
  function automatic logic pu(input logic [6:0] bus, input int s, input int j);
    return bus[(s == 0) ? 0 : (s == 1) ? 1 + j : 3 + j];
  endfunction

  // ---------------- 1024-bit instance against the rule
  localparam int N = 1024;
  logic [N-2:0]   pu_big;
  logic [3:0]     m_big;
  logic [N/2-1:0] beta_big;
  mux_network #(.N(N)) ubig (.pu_psum(pu_big), .m(m_big), .beta(beta_big));

  // trimmed network: 64-bit code, constituent codes of at most 4 bits
  logic [62:0] pu_t;
  logic [1:0]  m_t;
  logic [31:0] beta_t;
  mux_network #(.N(64), .MAX_STAGE(2)) utrim (.pu_psum(pu_t), .m(m_t), .beta(beta_t));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] exp8;
    // table rows: R_k's sources for stage 0, 1, 2
    for (int t = 0; t < 200; t++) begin
      pu8 = 7'($urandom);
      for (int s = 0; s < 4; s++) begin
        m8 = 2'(s);
        #1;
        case (s)
          0: exp8 = {4{pu(pu8, 0, 0)}};
          1: exp8 = {pu(pu8, 1, 0), pu(pu8, 1, 1), pu(pu8, 1, 0), pu(pu8, 1, 1)};
          2: exp8 = {pu(pu8, 2, 0), pu(pu8, 2, 1), pu(pu8, 2, 2), pu(pu8, 2, 3)};
          default: exp8 = 4'b0;
        endcase
        checks++;
        if (beta8 !== exp8) begin
          failures++;
          $display("FAIL N=8 m=%0d pu=%b beta=%b exp=%b", s, pu8, beta8, exp8);
        end
      end
    end

    // one-hot sweep: every PU bit of every stage
    for (int s = 0; s < 16; s++) begin
      int L;
      L = 1 << s;
      m_big = 4'(s);
      if (s < 10) begin
        for (int j = 0; j < L; j++) begin
          logic [N/2-1:0] exp;
          pu_big = '0;
          pu_big[L - 1 + j] = 1'b1;
          #1;
          exp = '0;
          for (int k = 0; k < N/2; k++) if (L - 1 - (k % L) == j) exp[k] = 1'b1;
          checks++;
          if (beta_big !== exp) begin
            failures++;
            $display("FAIL N=1024 stage %0d PU %0d", s, j);
          end
        end
        // random data, other stages active too
        for (int t = 0; t < 20; t++) begin
          logic [N/2-1:0] exp;
          for (int b = 0; b < N-1; b++) pu_big[b] = 1'($urandom);
          #1;
          for (int k = 0; k < N/2; k++) exp[k] = pu_big[L - 1 + (L - 1 - (k % L))];
          checks++;
          if (beta_big !== exp) begin
            failures++;
            $display("FAIL N=1024 stage %0d random", s);
          end
        end
      end else begin
        pu_big = '1;
        #1;
        checks++;
        if (beta_big !== '0) begin
          failures++;
          $display("FAIL N=1024 out-of-range stage %0d not zero", s);
        end
      end
    end

    for (int s = 0; s < 4; s++) begin
      for (int t = 0; t < 20; t++) begin
        logic [31:0] exp;
        int L;
        L = 1 << s;
        pu_t = 63'({$urandom, $urandom});
        m_t = 2'(s);
        #1;
        for (int k = 0; k < 32; k++) exp[k] = (s <= 2) ? pu_t[L - 1 + (L - 1 - (k % L))] : 1'b0;
        checks++;
        if (beta_t !== exp) begin
          failures++;
          $display("FAIL MAX_STAGE=2 stage %0d", s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
