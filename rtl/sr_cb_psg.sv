// sr_cb_psg: shift-register, constituent-code based partial-sum generator.
//
// A successive-cancellation polar decoder needs, for every g-function, the
// partial sums of the left sibling: the left subtree's estimated bits
// re-encoded. A plain shift-register generator keeps N/2 registers and,
// per estimated bit u_i, does R_0 <= u_i & c_{i,0} and
// R_k <= R_{k-1} ^ (u_i & c_{i,k}), c being the generator matrix. A
// constituent-code decoder instead resolves whole subtrees of length
// L = 2**s at once and hands over their partial sums beta_0 .. beta_{L-1}.
// Unrolling the bit-serial rule over the L bits of such a code gives, per
// block a of L registers (R_{aL} .. R_{aL+L-1}):
//   block 0 : R_{r}      <= beta_{L-1-r}
//   block a : R_{aL+r}   <= R_{(a-1)L+r} ^ (beta_{L-1-r} & c_{i,aL+r})
// with i the index of the code's last bit. That is one register update per
// constituent code, and it leaves the registers exactly as the bit-serial
// generator would after the same L bits. Single bits are the case L = 1.
//
// Datapath per register k (k = 0 .. N/2-1):
//   mux_network   picks beta_{L-1-(k mod L)} from the PUs of stage s
//   AND           with c_{i,k} from the matrix unit
//   psg_shifter   supplies R_{k-L} (zero for k < L); R_0 has no XOR
//   XOR, register
// control_signal_gen derives the multiplexer select, the shifter rows and
// the matrix-unit address from the stage index. All of this is the
// described architecture; the clear on frame_start, the reset and the
// configuration port of the matrix unit are this design's choices.
//
// MAX_STAGE caps the constituent-code length at 2**MAX_STAGE; it trims the
// multiplexer trees and the shifter rows and nothing else.
//
// Interface and timing: load the matrix unit (cfg_*), pulse frame_start,
// leave one idle cycle, then assert valid with stage and pu_psum for each
// resolved node, at most one per cycle. psum (bit k = R_k) shows the
// result of an update from the next cycle on. step_cnt counts updates.
module sr_cb_psg
  import psg_pkg::*;
#(
  parameter int unsigned N     = PSG_N,          // polar code length
  parameter int unsigned DEPTH = PSG_DEPTH,      // matrix-unit rows
  // longest constituent code is 2**MAX_STAGE; the default, N/2, is the
  // worst case the architecture is built for
  parameter int unsigned MAX_STAGE = $clog2(N) - 1,
  localparam int unsigned NST  = MAX_STAGE + 1,
  localparam int unsigned SW   = $clog2(NST),
  localparam int unsigned ROWS = MAX_STAGE,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1),
  localparam int unsigned W    = N / 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // matrix-unit configuration
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  logic [W-1:0]  cfg_row,
  // decoder side
  input  logic          frame_start,
  input  logic          valid,
  input  logic [SW-1:0] stage,
  input  logic [N-2:0]  pu_psum,     // PU outputs, stage s at bits 2**s-1 and up
  output logic [W-1:0]  psum,        // R_0 .. R_{N/2-1}
  output logic [CW-1:0] step_cnt
);

  logic [SW-1:0]   m;
  logic [ROWS-1:0] s_rows;
  logic            upd_en, rom_rd_en;
  logic [AW-1:0]   rom_rd_addr;
  logic [W-1:0]    beta, crow, r_q, r_d;
  logic [W-2:0]    sh;

  control_signal_gen #(.N(N), .DEPTH(DEPTH), .MAX_STAGE(MAX_STAGE)) u_csg (
    .clk, .rst_n, .frame_start, .valid, .stage,
    .m, .s_rows, .upd_en, .rom_rd_en, .rom_rd_addr, .step_cnt
  );

  mux_network #(.N(N), .MAX_STAGE(MAX_STAGE)) u_mux (.pu_psum, .m, .beta);

  matrix_unit #(.N(N), .DEPTH(DEPTH)) u_mat (
    .clk,
    .wr_en(cfg_we), .wr_addr(cfg_addr), .wr_data(cfg_row),
    .rd_en(rom_rd_en), .rd_addr(rom_rd_addr), .rd_data(crow)
  );

  psg_shifter #(.N(N), .MAX_STAGE(MAX_STAGE)) u_sh (.a(r_q[W-2:0]), .c(s_rows), .s(sh));

  // AND with the matrix row, XOR with the shifted register contents.
  assign r_d = {sh, 1'b0} ^ (beta & crow);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           r_q <= '0;
    else if (frame_start) r_q <= '0;
    else if (upd_en)      r_q <= r_d;
  end

  assign psum = r_q;

endmodule
