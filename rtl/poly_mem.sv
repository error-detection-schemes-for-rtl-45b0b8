// poly_mem: polynomial coefficient memory.
//
// N words of L bits with one port, the addr / rd_wr_en / din / dout
// signals of the paper's block diagram. rd_wr_en = 1 writes din to addr;
// rd_wr_en = 0 reads. The read is synchronous: dout shows the word at the
// address of the previous cycle (block-RAM style, read-before-write on a
// write cycle). The paper names the memory and its signals; the single
// port, read latency and read-before-write behaviour are this design's
// choice. Contents are not reset.
module poly_mem
  import ntt_fd_pkg::*;
#(
  parameter int unsigned N  = KYBER_N,
  parameter int unsigned L  = KYBER_L,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          rd_wr_en,
  input  logic [L-1:0]  din,
  output logic [L-1:0]  dout
);

  logic [L-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (rd_wr_en) mem[addr] <= din;
    dout <= mem[addr];
  end

endmodule
