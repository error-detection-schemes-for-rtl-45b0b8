// barrett_reduce: one word step of the word-wise Barrett reduction
// (the X1, <<1, X2 and -1 blocks of the MBRFD datapath).
//
// For one pair of w-bit words aw = alpha[i], bw = beta[j] it forms
//   c = (aw * bw) << ((i+j) * w)                      (X1, then <<1)
//   r = c - ((c * mu) >> 2l) * q                      (X2 in two steps, then -1)
// with mu = floor(2^(2l)/q). The quotient estimate is at most one below
// floor(c/q) because c < 2^(2l), so r lies in [0, 2q) and is congruent to c
// mod q; the final correction to [0, q) is done by the accumulator in mbrfd.
// The bit slice [2k-1:k] of the paper's product (k = 2l) is the shift by 2l
// here: the product never reaches bit 2k, so the upper bound of the slice is
// immaterial.
//
// Purely combinational: one word step per clock in the surrounding mbrfd,
// matching the paper's statement that all logic of one word step is
// evaluated within a single clock cycle.
//
// Ports: aw, bw (W bits), shw = i + j (word offset of the product),
//        r (L+1 bits, in [0, 2q)).
module barrett_reduce
  import ntt_fd_pkg::*;
#(
  parameter int unsigned L = KYBER_L,
  parameter int unsigned W = KYBER_W,
  parameter int unsigned Q = KYBER_Q,
  localparam int unsigned NW  = L / W,
  localparam int unsigned SHW = $clog2(2 * NW),
  localparam int unsigned MUW = 2 * L + 1 - $clog2(Q)   // width of mu
) (
  input  logic [W-1:0]   aw,
  input  logic [W-1:0]   bw,
  input  logic [SHW-1:0] shw,
  output logic [L:0]     r
);

  localparam logic [MUW-1:0] MU = MUW'(barrett_mu(L, Q));
  localparam logic [L-1:0]   QV = L'(Q);

  logic [2*W-1:0]     c_word;   // X1
  logic [2*L-1:0]     c;        // <<1
  logic [2*L+MUW-1:0] c_mu;     // X2, first step
  logic [MUW-1:0]     qhat;     // bits [2k-1:k] of c*mu
  logic [2*L+1:0]     qhat_q;   // X2, second step
  logic [L:0]         diff;     // -1 (the difference is below 2q)

  always_comb begin
    c_word = aw * bw;
    c      = (2*L)'(c_word) << (shw * W);
    c_mu   = (2*L+MUW)'(c) * (2*L+MUW)'(MU);
    qhat   = MUW'(c_mu >> (2 * L));
    qhat_q = (2*L+2)'(qhat) * (2*L+2)'(QV);
    diff   = (L+1)'((2*L+2)'(c) - qhat_q);
    r      = diff;
  end

endmodule
