// psg_pkg: constants and helpers shared by the partial-sum generator blocks.
//
// PSG_N is the polar code length the generator is built for and PSG_DEPTH
// the number of rows the matrix unit holds (one row per partial-sum update
// of a frame). The PU outputs of all decoder stages arrive on one flat bus:
// stage s (constituent-code length 2**s) owns 2**s bits starting at bit
// 2**s - 1, so stages 0 .. log2(N)-1 fill bits 0 .. N-2.
package psg_pkg;

  // Code length of the main configuration (1024-bit polar code).
  localparam int unsigned PSG_N = 1024;

  // Matrix-unit rows: an upper bound on the partial-sum updates per frame.
  localparam int unsigned PSG_DEPTH = 512;

  // First bit of stage s on the flat PU bus.
  function automatic int unsigned stage_offset(input int unsigned s);
    return (32'd1 << s) - 32'd1;
  endfunction

endpackage
