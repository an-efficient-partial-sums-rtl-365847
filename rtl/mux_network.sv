// mux_network: routes the partial sums of a finished constituent code from
// the PUs that produced them to the N/2 partial-sum registers.
//
// A constituent code of length L = 2**s is resolved by the PUs of stage s,
// which deliver its partial sums beta_0 .. beta_{L-1} (PU_{s,j} gives
// beta_j). Register R_k needs beta_{L-1-(k mod L)}: inside each block of L
// registers the partial sums sit in reversed order, and every block sees
// the same L values. So register k has exactly one candidate source per
// stage, PU_{s, 2**s-1-(k mod 2**s)}, and picks one of them with the
// binary stage index m. Every register owns an identical multiplexer tree
// over those MAX_STAGE+1 candidates (log2(N) by default), all trees share
// the one select m, and the tree is ceil(log2(log2 N)) multiplexers deep.
// This mapping and the shared binary select follow the described design;
// the tree is padded with constant zeros up to a power of two, so an
// out-of-range stage index routes zero to every register (a choice of
// this implementation).
//
// MAX_STAGE caps the constituent-code length at 2**MAX_STAGE. The default,
// log2(N)-1, is the worst case (codes up to N/2 bits) that the described
// design is built for; when the codes to be decoded have shorter nodes, a
// smaller MAX_STAGE drops the unused stages from every tree, which the
// described design names as a possible simplification.
//
// Interface: pu_psum is the flat PU bus (stage s at bits 2**s-1 and up),
// m the stage index, beta[k] the bit routed to R_k. Purely combinational;
// it sits on the decoder's critical path between the PUs and the registers.
module mux_network
  import psg_pkg::*;
#(
  parameter int unsigned N = PSG_N,              // polar code length
  // longest constituent code is 2**MAX_STAGE (default N/2, the worst case)
  parameter int unsigned MAX_STAGE = $clog2(N) - 1,
  localparam int unsigned NST = MAX_STAGE + 1,   // stages routed: 0 .. MAX_STAGE
  localparam int unsigned SW  = $clog2(NST),     // width of the stage index
  localparam int unsigned W   = N / 2            // partial-sum registers
) (
  input  logic [N-2:0]  pu_psum,  // PU outputs of all stages
  input  logic [SW-1:0] m,        // stage index of the finished constituent code
  output logic [W-1:0]  beta      // routed partial sum for each register
);

  if (N < 8 || (1 << $clog2(N)) != N) begin : g_bad_n
    $error("mux_network: N must be a power of two of at least 8");
  end
  if (MAX_STAGE < 1 || MAX_STAGE > $clog2(N) - 1) begin : g_bad_max
    $error("mux_network: MAX_STAGE must lie in 1 .. log2(N)-1");
  end

  for (genvar k = 0; k < W; k++) begin : g_reg
    // Candidates of register k, one per stage, padded with zeros.
    logic [(1 << SW)-1:0] cand;
    for (genvar s = 0; s < (1 << SW); s++) begin : g_stage
      if (s < NST) begin : g_used
        localparam int unsigned L = 1 << s;
        assign cand[s] = pu_psum[stage_offset(s) + L - 1 - (k % L)];
      end else begin : g_pad
        assign cand[s] = 1'b0;
      end
    end
    assign beta[k] = cand[m];
  end

endmodule
