// tb_ntt_fd_top_variants: end-to-end Kyber NTT (n = 256, q = 3329) with the
// RENO and the RESO recomputation units in place of the default RESWO;
// results, cycle count and fault flagging are checked by ntt_fd_bench.
module tb_ntt_fd_top_variants;
  import ntt_fd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic f0, f1;
  int c0, c1, e0, e1;

  ntt_fd_bench #(.RECOMP(RC_RENO), .NAME("kyber-RENO")) b_reno (.clk, .finished(f0), .checks(c0), .failures(e0));
  ntt_fd_bench #(.RECOMP(RC_RESO), .NAME("kyber-RESO")) b_reso (.clk, .finished(f1), .checks(c1), .failures(e1));

  initial begin
    fork
      begin
        wait (f0 && f1);
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1);
        $finish;
      end
      begin
        repeat (100000) @(posedge clk);
        $display("FAIL: watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1 + 1);
        $finish;
      end
    join
  end
endmodule
