// twiddle_rom: table of twiddle factors omega in bit-reversed order.
//
// Entry idx holds ZETA^bitrev(idx) mod Q, where bitrev reverses the low
// LAYERS bits; the NTT reads entry m + i for block i of the layer with m
// blocks. For Kyber (Q = 3329, ZETA = 17, LAYERS = 7) these are the 128
// standard Kyber zetas (entry 1 = 1729). The table is computed at
// elaboration from the formula, so other moduli only need new parameters.
// The paper takes the table as a precomputed input of the NTT; holding it
// in its own ROM, rather than in the coefficient memory, is this design's
// choice.
//
// Timing: synchronous read, w is the entry of the previous cycle's idx.
module twiddle_rom
  import ntt_fd_pkg::*;
#(
  parameter int unsigned L      = KYBER_L,
  parameter int unsigned Q      = KYBER_Q,
  parameter int unsigned LAYERS = KYBER_LAYERS,
  parameter int unsigned ZETA   = KYBER_ZETA,
  localparam int unsigned DEPTH = 1 << LAYERS
) (
  input  logic              clk,
  input  logic [LAYERS-1:0] idx,
  output logic [L-1:0]      w
);

  function automatic logic [DEPTH*L-1:0] gen_table();
    logic [DEPTH*L-1:0] t;
    t = '0;
    for (int unsigned e = 0; e < DEPTH; e++)
      t[e*L +: L] = L'(powmod(ZETA, bitrev(e, LAYERS), Q));
    return t;
  endfunction

  localparam logic [DEPTH*L-1:0] TABLE = gen_table();

  always_ff @(posedge clk) w <= TABLE[idx * L +: L];

endmodule
