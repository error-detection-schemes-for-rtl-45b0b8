// reswo_recomp: Recomputation with Swapped Operand (RESWO) check unit.
//
// Recomputes the Barrett remainder of one word step from a differently
// encoded operand, so that a fault in the main barrett_reduce path shows up
// as a mismatch. Datapath, following the paper's figure of the RESWO unit:
//   swap : aw_sw = aw with bits SI and SJ exchanged,
//          delta = aw[SI] - aw[SJ] in {-1, 0, 1},
//          dbeta = delta * (2^SI - 2^SJ) * bw          (the "Delta.beta[j]" output)
//   X3   : p  = aw_sw * bw
//   +    : cf = p + dbeta                              (= aw * bw, Lemma 1)
//   <<2  : cf = cf << ((i+j) * w)
//   X4   : qhat = (cf * mu) >> 2l, then qhat * q
//   -3   : rf = cf - qhat * q
// In a fault-free cycle rf equals the r of barrett_reduce bit for bit.
// The swap positions are "arbitrary" in the paper; this design fixes them by
// the parameters SI and SJ (default: the word's top and bottom bit).
// The dbeta term is formed with shifts and an add/subtract rather than a
// general multiplier, since delta is only -1, 0 or +1.
//
// Purely combinational; mbrfd registers its inputs one cycle after the main
// path (the "delayed" recomputation).
//
// Ports: aw, bw (W bits), shw = i + j, rf (L+1 bits).
module reswo_recomp
  import ntt_fd_pkg::*;
#(
  parameter int unsigned L  = KYBER_L,
  parameter int unsigned W  = KYBER_W,
  parameter int unsigned Q  = KYBER_Q,
  parameter int unsigned SI = W - 1,
  parameter int unsigned SJ = 0,
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
  localparam logic [L-1:0]   QV = L'(Q);

  logic [W-1:0]            aw_sw;
  logic signed [2*W+2:0]   bshift;   // (2^SI - 2^SJ) * bw
  logic signed [2*W+2:0]   dbeta;    // Delta * bw
  logic signed [2*W+2:0]   p;        // X3
  logic signed [2*W+2:0]   sum;      // +
  logic [2*L-1:0]          cf;       // <<2
  logic [2*L+MUW-1:0]      cf_mu;    // X4 step 1
  logic [MUW-1:0]          qhat;
  logic [2*L+1:0]          qhat_q;   // X4 step 2
  logic [L:0]              diff;     // -3 (the difference is below 2q)

  always_comb begin
    // swap block
    aw_sw     = aw;
    aw_sw[SI] = aw[SJ];
    aw_sw[SJ] = aw[SI];
    bshift    = ($signed({3'b000, W'(0), bw}) <<< SI) - ($signed({3'b000, W'(0), bw}) <<< SJ);
    unique case ({aw[SI], aw[SJ]})
      2'b10:   dbeta = bshift;
      2'b01:   dbeta = -bshift;
      default: dbeta = '0;
    endcase
    // X3 and adder
    p   = $signed({3'b000, (2*W)'(aw_sw) * (2*W)'(bw)});
    sum = p + dbeta;
    // <<2, X4, -3
    cf     = (2*L)'(sum[2*W-1:0]) << (shw * W);
    cf_mu  = (2*L+MUW)'(cf) * (2*L+MUW)'(MU);
    qhat   = MUW'(cf_mu >> (2 * L));
    qhat_q = (2*L+2)'(qhat) * (2*L+2)'(QV);
    diff   = (L+1)'((2*L+2)'(cf) - qhat_q);
    rf     = diff;
  end

endmodule
