// ntt_fd_top: NTT engine whose butterfly multiplier detects faults in its
// Barrett reduction by recomputation.
//
// Blocks: the polynomial coefficient memory (poly_mem) behind a mux/demux
// (mem_mux) shared between the NTT and an external port; the control unit
// (ctrl_unit) with the index generator (ijk_gen) and the twiddle ROM
// (twiddle_rom); and the CT butterfly (ct_bu), whose mbrfd multiplier
// pairs the word-wise Barrett reduction with a RESWO (default), RENO or
// RESO recomputation unit and a comparator.
//
// Use: while busy is low the external port (ext_*) reads and writes the
// memory, one word per cycle, read data one cycle after the address. A
// start pulse runs one forward NTT in place (LAYERS layers, coefficients in
// normal order in, bit-reversed order out, as in the reference NTT
// algorithm); done pulses at the end. fault_flag and fault_count report the
// butterflies whose recomputation disagreed with the main Barrett path.
// fi_alpha / fi_beta are fault-injection masks on the main path's
// coefficient and twiddle operands; tie them to 0 in use.
//
// Timing: one butterfly every NW*NW + 10 cycles, NW = L/W; an NTT takes
// LAYERS * N/2 butterflies (896 * 19 cycles for the Kyber defaults).
module ntt_fd_top
  import ntt_fd_pkg::*;
#(
  parameter int unsigned N      = KYBER_N,
  parameter int unsigned L      = KYBER_L,
  parameter int unsigned W      = KYBER_W,
  parameter int unsigned Q      = KYBER_Q,
  parameter int unsigned LAYERS = KYBER_LAYERS,
  parameter int unsigned ZETA   = KYBER_ZETA,
  parameter recomp_e     RECOMP = RC_RESWO,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned CW = $clog2(LAYERS * N / 2 + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          fault_flag,
  output logic [CW-1:0] fault_count,
  input  logic [AW-1:0] ext_addr,
  input  logic          ext_we,
  input  logic [L-1:0]  ext_din,
  output logic [L-1:0]  ext_dout,
  input  logic [L-1:0]  fi_alpha,
  input  logic [L-1:0]  fi_beta
);

  logic              ijk_init, ijk_step, ijk_last;
  logic [AW-1:0]     aj, ajt;
  logic [LAYERS-1:0] tw_idx;
  logic [L-1:0]      tw;

  logic              sel_ntt;
  logic [AW-1:0]     ntt_addr, mem_addr;
  logic              ntt_we, mem_we;
  logic [L-1:0]      ntt_din, ntt_dout, mem_din, mem_dout;

  logic              bu_in_valid, bu_in_ready, bu_out_valid, bu_fault;
  logic [L-1:0]      bu_u, bu_x, bu_y0, bu_y1;

  ctrl_unit #(.N(N), .L(L), .LAYERS(LAYERS)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .fault_flag, .fault_count,
    .ijk_init, .ijk_step, .aj, .ajt, .ijk_last,
    .sel_ntt, .mem_addr(ntt_addr), .mem_we(ntt_we), .mem_din(ntt_din), .mem_dout(ntt_dout),
    .bu_in_valid, .bu_in_ready, .bu_u, .bu_x,
    .bu_out_valid, .bu_y0, .bu_y1, .bu_fault
  );

  ijk_gen #(.N(N), .LAYERS(LAYERS)) u_ijk (
    .clk, .rst_n, .init(ijk_init), .step(ijk_step),
    .aj, .ajt, .tw_idx, .last(ijk_last)
  );

  twiddle_rom #(.L(L), .Q(Q), .LAYERS(LAYERS), .ZETA(ZETA)) u_tw (
    .clk, .idx(tw_idx), .w(tw)
  );

  mem_mux #(.N(N), .L(L)) u_mux (
    .sel_ntt,
    .ntt_addr, .ntt_we, .ntt_din, .ntt_dout,
    .ext_addr, .ext_we, .ext_din, .ext_dout,
    .mem_addr, .mem_we, .mem_din, .mem_dout
  );

  poly_mem #(.N(N), .L(L)) u_mem (
    .clk, .addr(mem_addr), .rd_wr_en(mem_we), .din(mem_din), .dout(mem_dout)
  );

  ct_bu #(.L(L), .W(W), .Q(Q), .RECOMP(RECOMP)) u_bu (
    .clk, .rst_n,
    .in_valid(bu_in_valid), .in_ready(bu_in_ready),
    .u(bu_u), .x(bu_x), .w(tw),
    .fi_alpha, .fi_beta,
    .out_valid(bu_out_valid), .y0(bu_y0), .y1(bu_y1), .fault(bu_fault)
  );

endmodule
