// reso_recomp: Recomputation with Shifted Operands (RESO) check unit.
//
// Recomputes the Barrett remainder of one word step with both words shifted
// left by one bit. Datapath, following the paper's figure of the RESO unit:
//   <<3, <<4 : as = aw << 1,  bs = bw << 1
//   X3       : cf = as * bs                              (= 4 * aw * bw)
//   <<2      : cf = cf << ((i+j) * w)
//   X4       : qhat = bits [2k+1 : k+2] of cf * mu       (same quotient as r)
//              then qhat * (q << 2)
//   -3       : rf4 = cf - qhat * (q << 2)                (= 4 r)
//   >>       : rf  = rf4 >> 2
// The paper's algorithm multiplies the quotient by q; with cf four times
// larger the remainder is only 4r if the subtrahend is 4*qhat*q, so this
// design applies the factor 4 to q (a wired shift). Without it the
// recomputed value would never match r.
//
// Purely combinational.
// Ports: aw, bw (W bits), shw = i + j, rf (L+1 bits).
module reso_recomp
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
  output logic [L:0]     rf
);

  localparam logic [MUW-1:0] MU = MUW'(barrett_mu(L, Q));
  localparam logic [L+1:0]   Q4 = (L+2)'(Q) << 2;

  logic [W:0]           as1, bs1;  // <<3, <<4
  logic [2*W+1:0]       p;         // X3
  logic [2*L+1:0]       cf;        // <<2
  logic [2*L+MUW+1:0]   cf_mu;     // X4 step 1
  logic [MUW-1:0]       qhat;
  logic [2*L+3:0]       qhat_q;    // X4 step 2
  logic [2*L+3:0]       rf4;       // -3

  always_comb begin
    as1    = {aw, 1'b0};
    bs1    = {bw, 1'b0};
    p      = as1 * bs1;
    cf     = (2*L+2)'(p) << (shw * W);
    cf_mu  = (2*L+MUW+2)'(cf) * (2*L+MUW+2)'(MU);
    qhat   = MUW'(cf_mu >> (2 * L + 2));
    qhat_q = (2*L+4)'(qhat) * (2*L+4)'(Q4);
    rf4    = (2*L+4)'(cf) - qhat_q;
    rf     = rf4[L+2:2];
  end

endmodule
