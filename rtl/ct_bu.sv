// ct_bu: Cooley-Tukey butterfly unit with fault-detecting multiplier.
//
// Computes one butterfly of the NTT,
//   V  = x * w mod q            (x = alpha[j+t], w = twiddle omega[m+i])
//   y0 = (U + V) mod q          (new alpha[j])
//   y1 = (U - V) mod q          (new alpha[j+t])
// in the paper's three pipeline stages:
//   1. the U register and the twiddle/operand buffer,
//   2. the mbrfd multiplier (word-wise Barrett with recomputation check),
//   3. the Adder and Sub blocks, registered.
// Stage 2 takes NW*NW + 2 cycles, so one butterfly is in flight at a time;
// in_ready is low from an accepted in_valid until out_valid.
// The fault output of mbrfd travels with the result. The butterfly outputs
// are always produced; what to do with a flagged result is left to the
// controller (this design counts it and raises a sticky flag).
//
// Timing: out_valid is high for one cycle, NW*NW + 4 clock edges after the
// edge that accepted in_valid.
// fi_alpha / fi_beta are fault-injection masks for the main Barrett path
// (see mbrfd); tie to 0 in use.
module ct_bu
  import ntt_fd_pkg::*;
#(
  parameter int unsigned L      = KYBER_L,
  parameter int unsigned W      = KYBER_W,
  parameter int unsigned Q      = KYBER_Q,
  parameter recomp_e     RECOMP = RC_RESWO
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [L-1:0] u,
  input  logic [L-1:0] x,
  input  logic [L-1:0] w,
  input  logic [L-1:0] fi_alpha,
  input  logic [L-1:0] fi_beta,
  output logic         out_valid,
  output logic [L-1:0] y0,
  output logic [L-1:0] y1,
  output logic         fault
);

  localparam logic [L:0] QV = (L+1)'(Q);

  logic         busy;
  logic         s1_valid;
  logic [L-1:0] u_q, x_q, w_q, fa_q, fb_q;
  logic         m_busy, m_done, m_fault;
  logic [L-1:0] v;
  logic [L:0]   add_s, sub_s;

  assign in_ready = !busy;

  mbrfd #(.L(L), .W(W), .Q(Q), .RECOMP(RECOMP)) u_mbrfd (
    .clk, .rst_n,
    .start(s1_valid), .alpha(x_q), .beta(w_q),
    .fi_alpha(fa_q), .fi_beta(fb_q),
    .busy(m_busy), .done(m_done), .rho(v), .fault(m_fault)
  );

  // stage 3 arithmetic: Adder and Sub modulo q
  always_comb begin
    add_s = {1'b0, u_q} + {1'b0, v};
    if (add_s >= QV) add_s = add_s - QV;
    sub_s = {1'b0, u_q} - {1'b0, v};
    if (u_q < v) sub_s = sub_s + QV;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      s1_valid  <= 1'b0;
      u_q       <= '0;
      x_q       <= '0;
      w_q       <= '0;
      fa_q      <= '0;
      fb_q      <= '0;
      out_valid <= 1'b0;
      y0        <= '0;
      y1        <= '0;
      fault     <= 1'b0;
    end else begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
      // stage 1
      if (in_valid && !busy) begin
        busy     <= 1'b1;
        s1_valid <= 1'b1;
        u_q      <= u;
        x_q      <= x;
        w_q      <= w;
        fa_q     <= fi_alpha;
        fb_q     <= fi_beta;
      end
      // stage 3
      if (m_done) begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        y0        <= L'(add_s);
        y1        <= L'(sub_s);
        fault     <= m_fault;
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) s1_valid |-> !m_busy)
    else $error("ct_bu: multiplier started while busy");

endmodule
