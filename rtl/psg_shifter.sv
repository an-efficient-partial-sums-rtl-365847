// psg_shifter: the (2^m - 1)-bit logical shifter of the partial-sum generator.
//
// After a constituent code of length L = 2**m every register R_k with
// k >= L must take the old value of R_{k-L}, and the first L registers
// take zero. The register chain already provides one position of that
// shift by wiring (shifter output S_j feeds register R_{j+1}), so the
// shifter itself only moves its inputs A_0 .. A_{N/2-2} (the outputs of
// R_0 .. R_{N/2-2}) up by 2**m - 1 positions and fills with zeros. It is a
// barrel shifter of log2(N)-1 rows of 2:1 multiplexers, N/2-1 per row; all
// multiplexers of a row share one select. Row r moves the data by 2**r when
// c[r] is set, so the total shift is the binary number c; for a shift of
// 2**m - 1 the control generator sets rows 0 .. m-1. The row count, the
// multiplexer count and the zero fill follow the described design; the
// order of the rows (shortest distance first) is this design's choice.
//
// With codes capped at 2**MAX_STAGE bits only MAX_STAGE rows are needed
// (shifts up to 2**MAX_STAGE - 1); the default keeps all log2(N)-1.
//
// Interface: a = R_0 .. R_{N/2-2}, c = row selects, s[j] drives the XOR of
// R_{j+1}. Combinational. Its data come from the registers, not from the
// PUs, so it is off the decoder's critical path.
module psg_shifter
  import psg_pkg::*;
#(
  parameter int unsigned N = PSG_N,              // polar code length
  // longest constituent code is 2**MAX_STAGE (default N/2, the worst case)
  parameter int unsigned MAX_STAGE = $clog2(N) - 1,
  localparam int unsigned W    = N / 2 - 1,      // shifter width
  localparam int unsigned ROWS = MAX_STAGE       // multiplexer rows
) (
  input  logic [W-1:0]    a,   // register outputs R_0 .. R_{N/2-2}
  input  logic [ROWS-1:0] c,   // row selects: shift by the binary value of c
  output logic [W-1:0]    s    // shifted data, s[j] goes to register R_{j+1}
);

  if (N < 8 || (1 << $clog2(N)) != N) begin : g_bad_n
    $error("psg_shifter: N must be a power of two of at least 8");
  end
  if (MAX_STAGE < 1 || MAX_STAGE > $clog2(N) - 1) begin : g_bad_max
    $error("psg_shifter: MAX_STAGE must lie in 1 .. log2(N)-1");
  end

  // x[r] is the data entering row r.
  logic [ROWS:0][W-1:0] x;
  assign x[0] = a;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar j = 0; j < W; j++) begin : g_mux
      if (j >= (1 << r)) begin : g_shift
        assign x[r+1][j] = c[r] ? x[r][j - (1 << r)] : x[r][j];
      end else begin : g_zero
        assign x[r+1][j] = c[r] ? 1'b0 : x[r][j];
      end
    end
  end

  assign s = x[ROWS];

endmodule
