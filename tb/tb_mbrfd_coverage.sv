// tb_mbrfd_coverage: runs the fault-injection campaign of
// mbrfd_coverage_bench for RESWO at w = 4, 8 and 24 and for RENO and RESO at
// w = 24 (l = 24, q = 8380417), and prints each detection rate.
module tb_mbrfd_coverage;
  import ntt_fd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [4:0] fin;
  int c [5], e [5];

  mbrfd_coverage_bench #(.W(4),  .RECOMP(RC_RESWO), .NAME("RESWO")) b0 (.clk, .finished(fin[0]), .checks(c[0]), .failures(e[0]));
  mbrfd_coverage_bench #(.W(8),  .RECOMP(RC_RESWO), .NAME("RESWO")) b1 (.clk, .finished(fin[1]), .checks(c[1]), .failures(e[1]));
  mbrfd_coverage_bench #(.W(24), .RECOMP(RC_RESWO), .NAME("RESWO")) b2 (.clk, .finished(fin[2]), .checks(c[2]), .failures(e[2]));
  mbrfd_coverage_bench #(.W(24), .RECOMP(RC_RENO),  .NAME("RENO"))  b3 (.clk, .finished(fin[3]), .checks(c[3]), .failures(e[3]));
  mbrfd_coverage_bench #(.W(24), .RECOMP(RC_RESO),  .NAME("RESO"))  b4 (.clk, .finished(fin[4]), .checks(c[4]), .failures(e[4]));

  function automatic int total(int v [5]);
    return v[0] + v[1] + v[2] + v[3] + v[4];
  endfunction

  initial begin
    fork
      begin
        wait (&fin);
        $display("TB_RESULT checks=%0d failures=%0d", total(c), total(e));
        $finish;
      end
      begin
        repeat (2000000) @(posedge clk);
        $display("FAIL: watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", total(c), total(e) + 1);
        $finish;
      end
    join
  end
endmodule
