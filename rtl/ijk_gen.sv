// ijk_gen: index generator for the iterative Cooley-Tukey NTT.
//
// Walks the three loops of the NTT (layer with m blocks of half-size t,
// block i starting at k, butterfly j in k .. k+t-1) one butterfly per
// step pulse, starting from t = N/2, m = 1 on init. It outputs the two
// coefficient addresses of the current butterfly, aj = j and ajt = j + t,
// the twiddle index m + i, and last, high on the final butterfly of layer
// LAYERS. The loop structure is the paper's NTT algorithm; the paper
// only names this block ("i,j,k gen").
//
// Timing: outputs are registered; init and step take effect at the clock
// edge. step on the last butterfly leaves the counters at the final state.
module ijk_gen
  import ntt_fd_pkg::*;
#(
  parameter int unsigned N      = KYBER_N,
  parameter int unsigned LAYERS = KYBER_LAYERS,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  logic              step,
  output logic [AW-1:0]     aj,
  output logic [AW-1:0]     ajt,
  output logic [LAYERS-1:0] tw_idx,
  output logic              last
);

  logic [AW:0] t_q, m_q, i_q, j_q, k_q;
  logic        end_blk, end_layer;

  always_comb begin
    end_blk   = (j_q == k_q + t_q - 1'b1);
    end_layer = end_blk && (i_q == m_q - 1'b1);
    last      = end_layer && (m_q == (AW+1)'(1 << (LAYERS - 1)));
    aj        = AW'(j_q);
    ajt       = AW'(j_q + t_q);
    tw_idx    = LAYERS'(m_q + i_q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || init) begin
      t_q <= (AW+1)'(N / 2);
      m_q <= (AW+1)'(1);
      i_q <= '0;
      j_q <= '0;
      k_q <= '0;
    end else if (step && !last) begin
      if (!end_blk) begin
        j_q <= j_q + 1'b1;
      end else if (!end_layer) begin
        i_q <= i_q + 1'b1;
        k_q <= k_q + (t_q << 1);
        j_q <= k_q + (t_q << 1);
      end else begin
        t_q <= t_q >> 1;
        m_q <= m_q << 1;
        i_q <= '0;
        k_q <= '0;
        j_q <= '0;
      end
    end
  end

endmodule
