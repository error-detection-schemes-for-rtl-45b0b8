// mem_mux: shares the coefficient memory port (the paper's mux / demux
// blocks).
//
// When sel_ntt is high the NTT controller drives addr, rd_wr_en and din and
// receives dout; otherwise the external port (standing for the paper's
// "other blocks": polynomial multiplier, adder, loader) does. The demux
// side routes dout to the owner and drives zero to the other. Purely
// combinational. The select is driven by the control unit.
module mem_mux
  import ntt_fd_pkg::*;
#(
  parameter int unsigned N  = KYBER_N,
  parameter int unsigned L  = KYBER_L,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          sel_ntt,
  input  logic [AW-1:0] ntt_addr,
  input  logic          ntt_we,
  input  logic [L-1:0]  ntt_din,
  output logic [L-1:0]  ntt_dout,
  input  logic [AW-1:0] ext_addr,
  input  logic          ext_we,
  input  logic [L-1:0]  ext_din,
  output logic [L-1:0]  ext_dout,
  output logic [AW-1:0] mem_addr,
  output logic          mem_we,
  output logic [L-1:0]  mem_din,
  input  logic [L-1:0]  mem_dout
);

  always_comb begin
    mem_addr = sel_ntt ? ntt_addr : ext_addr;
    mem_we   = sel_ntt ? ntt_we   : ext_we;
    mem_din  = sel_ntt ? ntt_din  : ext_din;
    ntt_dout = sel_ntt ? mem_dout : '0;
    ext_dout = sel_ntt ? '0       : mem_dout;
  end

endmodule
