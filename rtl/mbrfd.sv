// mbrfd: Modified Barrett Reduction for Fault Detection.
//
// Computes rho = alpha * beta mod q word by word and flags a fault when the
// recomputation unit disagrees with the main Barrett path.
//
// How it works. alpha and beta (L bits) are split into NW = L/W words. For
// every pair (i, j), i the outer and j the inner loop index, one clock cycle
// runs the main path barrett_reduce on (alpha[i], beta[j]) giving r in
// [0, 2q). r, the two words and i+j are registered. In the next cycle the
// selected recomputation unit (RESWO, RENO or RESO, parameter RECOMP)
// recomputes rf from the registered words, the comparator raises f_i when
// r != rf, and the accumulator (the "-2" block) adds r to rho with the
// conditional subtractions "if r >= q: r - q" and "if rho >= q: rho - q".
// The recomputation therefore runs one cycle behind the main path, which is
// how this design realises the paper's "delayed clock" for the ReComp unit.
// The fault output is the OR of all f_i of one multiplication.
//
// The paper's algorithm writes "if r > n" and "if rho > n" with n standing
// for the modulus q; this design uses >= q so that rho ends in [0, q).
//
// Fault injection: fi_alpha and fi_beta are XOR masks applied to the words
// entering the main path only (model of a fault in alpha, in beta or in
// both, as in the paper's error-coverage study). Tie them to 0 in use.
//
// Interface and timing: start is accepted when busy is low and samples
// alpha, beta. done pulses for one cycle NW*NW + 2 cycles after the start
// cycle, with rho and fault valid from then until the next done.
module mbrfd
  import ntt_fd_pkg::*;
#(
  parameter int unsigned L      = KYBER_L,
  parameter int unsigned W      = KYBER_W,
  parameter int unsigned Q      = KYBER_Q,
  parameter recomp_e     RECOMP = RC_RESWO,
  localparam int unsigned NW  = L / W,
  localparam int unsigned SHW = $clog2(2 * NW),
  localparam int unsigned IW  = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [L-1:0] alpha,
  input  logic [L-1:0] beta,
  input  logic [L-1:0] fi_alpha,
  input  logic [L-1:0] fi_beta,
  output logic         busy,
  output logic         done,
  output logic [L-1:0] rho,
  output logic         fault
);

  localparam logic [L:0] QV = (L+1)'(Q);

  // operand registers and loop counters
  logic [L-1:0]  a_q, b_q, fa_q, fb_q;
  logic [IW-1:0] i_q, j_q;
  logic          last;

  // main path
  logic [W-1:0]   aw, bw, aw_main, bw_main;
  logic [SHW-1:0] shw;
  logic [L:0]     r;

  // stage-2 registers (delayed recomputation)
  logic           s2_valid, s2_last;
  logic [W-1:0]   s2_aw, s2_bw;
  logic [SHW-1:0] s2_shw;
  logic [L:0]     s2_r;
  logic [L:0]     rf;

  // accumulator
  logic [L-1:0] acc_q;
  logic         facc_q;
  logic [L:0]   r_red;
  logic [L:0]   sum;
  logic [L-1:0] acc_next;
  logic         f_i;

  always_comb begin
    aw      = a_q[i_q * W +: W];
    bw      = b_q[j_q * W +: W];
    aw_main = aw ^ fa_q[i_q * W +: W];
    bw_main = bw ^ fb_q[j_q * W +: W];
    shw     = SHW'(i_q) + SHW'(j_q);
    last    = (i_q == IW'(NW - 1)) && (j_q == IW'(NW - 1));
  end

  barrett_reduce #(.L(L), .W(W), .Q(Q)) u_barrett (
    .aw(aw_main), .bw(bw_main), .shw(shw), .r(r)
  );

  generate
    if (RECOMP == RC_RENO) begin : g_reno
      reno_recomp  #(.L(L), .W(W), .Q(Q)) u_recomp (.aw(s2_aw), .bw(s2_bw), .shw(s2_shw), .rf(rf));
    end else if (RECOMP == RC_RESO) begin : g_reso
      reso_recomp  #(.L(L), .W(W), .Q(Q)) u_recomp (.aw(s2_aw), .bw(s2_bw), .shw(s2_shw), .rf(rf));
    end else begin : g_reswo
      reswo_recomp #(.L(L), .W(W), .Q(Q)) u_recomp (.aw(s2_aw), .bw(s2_bw), .shw(s2_shw), .rf(rf));
    end
  endgenerate

  // comparator and the "-2" accumulate / conditional-subtract block
  always_comb begin
    f_i      = (s2_r != rf);
    r_red    = (s2_r >= QV) ? s2_r - QV : s2_r;
    sum      = {1'b0, acc_q} + r_red;
    acc_next = (sum >= QV) ? L'(sum - QV) : L'(sum);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      a_q      <= '0;
      b_q      <= '0;
      fa_q     <= '0;
      fb_q     <= '0;
      i_q      <= '0;
      j_q      <= '0;
      s2_valid <= 1'b0;
      s2_last  <= 1'b0;
      s2_aw    <= '0;
      s2_bw    <= '0;
      s2_shw   <= '0;
      s2_r     <= '0;
      acc_q    <= '0;
      facc_q   <= 1'b0;
      done     <= 1'b0;
      rho      <= '0;
      fault    <= 1'b0;
    end else begin
      done <= 1'b0;
      // stage 1: word loop over the main Barrett path
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          a_q  <= alpha;
          b_q  <= beta;
          fa_q <= fi_alpha;
          fb_q <= fi_beta;
          i_q  <= '0;
          j_q  <= '0;
        end
        s2_valid <= 1'b0;
      end else begin
        s2_valid <= 1'b1;
        s2_last  <= last;
        s2_aw    <= aw;
        s2_bw    <= bw;
        s2_shw   <= shw;
        s2_r     <= r;
        if (j_q == IW'(NW - 1)) begin
          j_q <= '0;
          i_q <= i_q + 1'b1;
        end else begin
          j_q <= j_q + 1'b1;
        end
        if (last) busy <= 1'b0;
      end
      // stage 2: recomputation, compare, accumulate
      if (s2_valid) begin
        if (s2_last) begin
          acc_q  <= '0;
          facc_q <= 1'b0;
          rho    <= acc_next;
          fault  <= facc_q | f_i;
          done   <= 1'b1;
        end else begin
          acc_q  <= acc_next;
          facc_q <= facc_q | f_i;
        end
      end
    end
  end

  // the main path's remainder is always in [0, 2q); start only when idle
  a_r_range: assert property (@(posedge clk) disable iff (!rst_n) s2_valid |-> (s2_r < 2 * QV))
    else $error("mbrfd: r out of range");
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("mbrfd: start while busy");

endmodule
