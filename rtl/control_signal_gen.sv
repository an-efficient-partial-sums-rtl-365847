// control_signal_gen: the control signal generator (CSG) of the partial-sum
// generator.
//
// For every update the decoder reports the stage index of what it just
// resolved: stage s means a constituent code of length 2**s (s = 0 is a
// single estimated bit, as in a plain shift-register generator). From it
// the CSG derives
//   * M, the select of the multiplexing network: the stage index itself in
//     binary, shared by the multiplexer trees of all registers;
//   * S, the row selects of the (2^m - 1) shifter: a k-to-2^k decoder turns
//     the stage index into a one-hot word, and row r is enabled when the
//     one-hot bit lies above position r, which sets rows 0 .. s-1 and so
//     shifts by 2**s - 1 (decoder output 0, stage 0, drives no row);
//   * the matrix-unit read address. The CSG counts the updates of a frame;
//     rows are stored in update order and are fetched one cycle ahead: the
//     frame start reads row 0 and each update reads the row of the next one.
// The binary select M and the decoder that drives S follow the described
// design; the update counter, the prefetch and the frame_start pulse are
// this design's own choices, since the control is only called simple.
//
// Timing: M and S are combinational from stage. upd_en is valid. Between
// frame_start and the first valid at least one idle cycle is needed for
// the first row to arrive; after that valid may be high every cycle.
module control_signal_gen
  import psg_pkg::*;
#(
  parameter int unsigned N     = PSG_N,          // polar code length
  parameter int unsigned DEPTH = PSG_DEPTH,      // matrix-unit rows
  // longest constituent code is 2**MAX_STAGE (default N/2, the worst case)
  parameter int unsigned MAX_STAGE = $clog2(N) - 1,
  localparam int unsigned NST  = MAX_STAGE + 1,  // stage indices in use
  localparam int unsigned SW   = $clog2(NST),    // stage index width
  localparam int unsigned ROWS = MAX_STAGE,      // shifter rows
  localparam int unsigned AW   = $clog2(DEPTH),  // matrix-unit address width
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            frame_start,   // pulse: a new frame begins
  input  logic            valid,         // the decoder resolved a node this cycle
  input  logic [SW-1:0]   stage,         // log2 of its length
  output logic [SW-1:0]   m,             // control signal M (multiplexing network)
  output logic [ROWS-1:0] s_rows,        // control signal S (shifter rows)
  output logic            upd_en,        // registers load this cycle
  output logic            rom_rd_en,
  output logic [AW-1:0]   rom_rd_addr,
  output logic [CW-1:0]   step_cnt       // updates done in this frame
);

  localparam int unsigned NDEC = 1 << SW;

  // k-to-2^k decoder and the row selects it drives.
  logic [NDEC-1:0] dec;
  always_comb begin
    dec = '0;
    dec[stage] = 1'b1;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign s_rows[r] = |dec[NDEC-1:r+1];
  end

  assign m      = stage;
  assign upd_en = valid;

  // Update counter and matrix-unit prefetch.
  logic [CW-1:0] cnt_next;
  assign cnt_next = step_cnt + CW'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           step_cnt <= '0;
    else if (frame_start) step_cnt <= '0;
    else if (valid)       step_cnt <= cnt_next;
  end

  assign rom_rd_en   = frame_start | valid;
  assign rom_rd_addr = frame_start ? '0 : cnt_next[AW-1:0];

  // Handshake rules.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(frame_start && valid))
    else $error("control_signal_gen: valid during frame_start");
  a_stage_range: assert property (@(posedge clk) disable iff (!rst_n)
    valid |-> (int'(stage) < NST))
    else $error("control_signal_gen: stage index out of range");
  a_depth: assert property (@(posedge clk) disable iff (!rst_n)
    valid |-> (int'(step_cnt) < DEPTH))
    else $error("control_signal_gen: more updates than matrix-unit rows");

endmodule
