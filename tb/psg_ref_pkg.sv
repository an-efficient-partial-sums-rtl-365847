// psg_ref_pkg: reference models used by the partial-sum generator tests.
//
// gen_bit(i, k) is entry (i, k) of the polar generator matrix
// G = F^{(x)n} with F = [1 0; 1 1]: it is 1 exactly when every bit set in
// k is also set in i. encode() forms the partial sums beta = u * G_L of a
// length-L constituent code. serial_update() is the bit-serial
// shift-register generator the constituent-code generator must agree
// with: R_0 <= u & c_{i,0}, R_k <= R_{k-1} ^ (u & c_{i,k}).
package psg_ref_pkg;

  localparam int MAXW = 512;   // largest register count modelled

  typedef logic [MAXW-1:0] regs_t;

  function automatic logic gen_bit(input int i, input int k);
    return (k & ~i) == 0;
  endfunction

  // beta_j = XOR over a of u_a & G_L[a][j]
  function automatic regs_t encode(input regs_t u, input int L);
    regs_t b = '0;
    for (int j = 0; j < L; j++)
      for (int a = 0; a < L; a++)
        b[j] = b[j] ^ (u[a] & gen_bit(a, j));
    return b;
  endfunction

  // One estimated bit u (index i) into a W-register bit-serial generator.
  function automatic regs_t serial_update(input regs_t r, input logic u,
                                          input int i, input int W);
    regs_t n = '0;
    n[0] = u & gen_bit(i, 0);
    for (int k = 1; k < W; k++) n[k] = r[k-1] ^ (u & gen_bit(i, k));
    return n;
  endfunction

endpackage
