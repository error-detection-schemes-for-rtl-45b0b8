// tb_ntt_fd_top_pqc: the other parameter sets the design is evaluated at,
// each a complete forward NTT with the RESWO check, w = 4:
//   Dilithium  n = 256,  q = 8380417, l = 24, 8 layers, zeta = 1753
//   Falcon     n = 512,  q = 12289,   l = 16, 9 layers, zeta = 10302
//   NTRU-style n = 2048, q = 12289,   l = 16, 11 layers, zeta = 1331
// (zeta is a primitive 2^(layers+1)-th root of unity mod q; l is the
// coefficient width rounded up to a multiple of w.) Results, cycle count
// and fault flagging are checked by ntt_fd_bench.
module tb_ntt_fd_top_pqc;
  import ntt_fd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  ntt_fd_bench #(.N(256), .L(24), .W(4), .Q(8380417), .LAYERS(8), .ZETA(1753), .NAME("dilithium"))
    b_dil (.clk, .finished(f0), .checks(c0), .failures(e0));
  ntt_fd_bench #(.N(512), .L(16), .W(4), .Q(12289), .LAYERS(9), .ZETA(10302), .NAME("falcon"))
    b_fal (.clk, .finished(f1), .checks(c1), .failures(e1));
  ntt_fd_bench #(.N(2048), .L(16), .W(4), .Q(12289), .LAYERS(11), .ZETA(1331), .NAME("ntru"))
    b_ntru (.clk, .finished(f2), .checks(c2), .failures(e2));

  initial begin
    fork
      begin
        wait (f0 && f1 && f2);
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
        $finish;
      end
      begin
        repeat (800000) @(posedge clk);
        $display("FAIL: watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
        $finish;
      end
    join
  end
endmodule
