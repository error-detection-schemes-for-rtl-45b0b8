// ntt_fd_pkg: constants, types and small arithmetic helpers shared by the
// fault-detecting NTT datapath.
//
// The default numbers are the Kyber configuration the design is measured in:
// n = 256 coefficients, q = 3329, l = 12-bit coefficients processed in
// w = 4-bit words. mu = floor(2^(2l)/q) is the Barrett constant (5039 for
// Kyber). The NTT runs 7 layers with the 256-th root of unity zeta = 17,
// because 3329 - 1 = 2^8 * 13 has no 512-th root of unity (Kyber's standard
// incomplete NTT); the generic algorithm would run log2(n) layers.
package ntt_fd_pkg;

  // Which recomputation unit checks the Barrett reduction.
  typedef enum logic [1:0] {
    RC_RESWO = 2'd0,  // recomputation with swapped operand bits (default)
    RC_RENO  = 2'd1,  // recomputation with negated operand
    RC_RESO  = 2'd2   // recomputation with shifted operands
  } recomp_e;

  localparam int unsigned KYBER_N      = 256;
  localparam int unsigned KYBER_Q      = 3329;
  localparam int unsigned KYBER_L      = 12;
  localparam int unsigned KYBER_W      = 4;
  localparam int unsigned KYBER_LAYERS = 7;
  localparam int unsigned KYBER_ZETA   = 17;

  // Barrett constant mu = floor(2^(2l) / q).
  function automatic longint unsigned barrett_mu(int unsigned l, int unsigned q);
    return (64'd1 << (2 * l)) / longint'(q);
  endfunction

  // Bit-reversal of the low 'bits' bits of x.
  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned y;
    y = 0;
    for (int unsigned b = 0; b < bits; b++) y = (y << 1) | ((x >> b) & 1);
    return y;
  endfunction

  // base^e mod q by square-and-multiply.
  function automatic int unsigned powmod(int unsigned base, int unsigned e, int unsigned q);
    longint unsigned r, b, qq;
    int unsigned     k;
    qq = longint'(q);
    r  = 1;
    b  = longint'(base) % qq;
    k = e;
    while (k != 0) begin
      if ((k & 1) != 0) r = (r * b) % qq;
      b = (b * b) % qq;
      k = k >> 1;
    end
    return int'(r);
  endfunction

endpackage
