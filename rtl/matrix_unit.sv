// matrix_unit: the stored generator-matrix rows of the partial-sum generator.
//
// Each partial-sum update of a frame needs the row c_{i,0} .. c_{i,N/2-1}
// of the generator matrix G = F^{(x)log2 N}, where i is the index of the
// last bit of the constituent code (or of the single bit) being resolved.
// Which rows occur depends on how the code splits into constituent codes,
// so the rows are stored, one per update and in decoding order, instead of
// being generated on line. The described design uses a pre-calculated ROM
// and names a writable memory as the flexible alternative; this module is
// that writable variant: the rows of a code are written once through the
// configuration port and then read during decoding, so one netlist serves
// any code of length N. DEPTH bounds the updates per frame.
//
// Interface: wr_* writes one row per cycle. rd_en/rd_addr read one row
// with one cycle of latency (rd_data is registered, as in a block RAM);
// rd_data holds its value while rd_en is low.
module matrix_unit
  import psg_pkg::*;
#(
  parameter int unsigned N     = PSG_N,          // polar code length
  parameter int unsigned DEPTH = PSG_DEPTH,      // rows (updates per frame)
  localparam int unsigned AW = $clog2(DEPTH),    // address width
  localparam int unsigned W  = N / 2             // row width
) (
  input  logic          clk,
  input  logic          wr_en,     // configuration write
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,   // row c_{i,0} .. c_{i,N/2-1}, bit k = c_{i,k}
  input  logic          rd_en,     // read for the next update
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data    // row, valid the cycle after rd_en
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
