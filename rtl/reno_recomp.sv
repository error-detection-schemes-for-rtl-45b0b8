// reno_recomp: Recomputation with Negated Operand (RENO) check unit.
//
// Recomputes the Barrett remainder of one word step with the alpha word
// negated, and negates the result back. Datapath, following the paper's
// figure of the RENO unit:
//   2's compl1 : na  = -aw                               (signed, W+1 bits)
//   X3         : cf  = na * bw                           (= -c before the shift)
//   <<2        : cf  = cf << ((i+j) * w)
//   X4         : qn  = -(((-cf) * mu) >> 2l),  then qn * q
//   -3         : rn  = cf - qn * q                       (= -r)
//   2's compl2 : rf  = -rn                               (= r)
// The paper writes the reduction of the negative product as
// "r^f = -c^f - (-c^f x mu)[2k-1...k] x q" followed by a 2's complement. The
// quotient is taken from the magnitude -cf and applied with its sign, so
// that the recomputed remainder equals barrett_reduce's r exactly; an
// arithmetic (floor) shift of the negative product would differ by q.
//
// Purely combinational.
// Ports: aw, bw (W bits), shw = i + j, rf (L+1 bits).
module reno_recomp
  import ntt_fd_pkg::*;
#(
  parameter int unsigned L = KYBER_L,
  parameter int unsigned W = KYBER_W,
  parameter int unsigned Q = KYBER_Q,
  localparam int unsigned NW  = L / W,
  localparam int unsigned SHW = $clog2(2 * NW),
  localparam int unsigned MUW = 2 * L + 1 - $clog2(Q),  // width of mu
  localparam int unsigned SW  = 2 * L + MUW + 2   // signed working width
) (
  input  logic [W-1:0]   aw,
  input  logic [W-1:0]   bw,
  input  logic [SHW-1:0] shw,
  output logic [L:0]     rf
);

  localparam logic [MUW-1:0] MU = MUW'(barrett_mu(L, Q));
  localparam logic [L-1:0]   QV = L'(Q);

  logic signed [W:0]      na;      // 2's compl1
  logic signed [2*W+1:0]  p;       // X3
  logic signed [SW-1:0]   cf;      // <<2
  logic        [SW-1:0]   mag;     // -cf
  logic        [SW-1:0]   mag_mu;  // X4 step 1
  logic signed [SW-1:0]   qn;      // negative quotient
  logic signed [SW-1:0]   qn_q;    // X4 step 2
  logic signed [SW-1:0]   rn;      // -3
  logic signed [SW-1:0]   rpos;    // 2's compl2

  always_comb begin
    na     = -$signed({1'b0, aw});
    p      = na * $signed({1'b0, bw});
    cf     = SW'(p) <<< (shw * W);
    mag    = -cf;
    mag_mu = mag * SW'(MU);
    qn     = -$signed(mag_mu >> (2 * L));
    qn_q   = qn * $signed(SW'(QV));
    rn     = cf - qn_q;
    rpos   = -rn;
    rf     = rpos[L:0];
  end

endmodule
