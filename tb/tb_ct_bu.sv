// tb_ct_bu: tests the butterfly unit at the Kyber size. For random U, X and
// twiddle w it checks y0 = (U + X*w) mod q and y1 = (U - X*w) mod q, computed
// here with integer arithmetic, the fault flag (low on clean operands, high
// for a one-bit fault in the coefficient operand when the twiddle is
// nonzero), the in_ready handshake, and the latency of NW*NW + 4 = 13 edges
// from accepting in_valid to out_valid.
module tb_ct_bu;
  localparam int Q = 3329;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic in_ready, out_valid, fault;
  logic [11:0] u = '0, x = '0, w = '0, fi_alpha = '0, fi_beta = '0, y0, y1;
  int checks = 0, failures = 0;

  ct_bu dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic one(int uu, int xx, int ww, int fa);
    int lat;
    int v, e0, e1;
    @(negedge clk);
    chk(in_ready, "not ready");
    u = 12'(uu); x = 12'(xx); w = 12'(ww); fi_alpha = 12'(fa); in_valid = 1;
    @(negedge clk); in_valid = 0;
    // a second request while busy must be held off
    chk(!in_ready, "ready while busy");
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    chk(lat == 13, $sformatf("latency %0d", lat));
    v  = int'((longint'(xx ^ fa) * ww) % Q);
    e0 = (uu + v) % Q;
    e1 = (uu - v + Q) % Q;
    chk(int'(y0) == e0 && int'(y1) == e1, $sformatf("u=%0d x=%0d w=%0d y0=%0d/%0d y1=%0d/%0d", uu, xx, ww, y0, e0, y1, e1));
    chk(fault == (fa != 0 && ww != 0), $sformatf("fault=%b fa=%h", fault, fa));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(0, 0, 0, 0);
    one(Q - 1, Q - 1, Q - 1, 0);
    one(0, 1, 1, 0);
    for (int n = 0; n < 300; n++)
      one(int'($urandom_range(Q - 1)), int'($urandom_range(Q - 1)), int'($urandom_range(1, Q - 1)), 0);
    for (int n = 0; n < 100; n++)
      one(int'($urandom_range(Q - 1)), int'($urandom_range(Q - 1)), int'($urandom_range(1, Q - 1)), 1 << $urandom_range(11));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
