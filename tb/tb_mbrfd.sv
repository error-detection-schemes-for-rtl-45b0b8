// tb_mbrfd: tests the fault-detecting modular multiplier with each of the
// three recomputation units (RESWO, RENO, RESO) side by side, at the Kyber
// size (l = 12, w = 4, q = 3329).
// Clean operands: rho must equal alpha*beta mod q and fault must stay low.
// With random and burst bit flips injected into the main path's operands:
// rho must equal (faulty alpha)*(faulty beta) mod q, and fault must be set
// exactly when some word step's Barrett remainder differs from the clean
// one, which this bench works out word by word with integer arithmetic.
// The latency from start to done must be NW*NW + 2 = 11 cycles.
module tb_mbrfd;
  import ntt_fd_pkg::*;
  localparam int Q = 3329, L = 12, W = 4, NW = 3;
  localparam longint MU = (64'd1 << 24) / Q;

  logic clk = 0, rst_n = 0, start = 0;
  logic [11:0] alpha = '0, beta = '0, fi_alpha = '0, fi_beta = '0;
  logic [2:0] busy, done, fault;
  logic [11:0] rho [3];
  int checks = 0, failures = 0;
  int n_detect = 0, n_clean = 0;

  mbrfd #(.RECOMP(RC_RESWO)) u_reswo (.clk, .rst_n, .start, .alpha, .beta, .fi_alpha, .fi_beta,
                                     .busy(busy[0]), .done(done[0]), .rho(rho[0]), .fault(fault[0]));
  mbrfd #(.RECOMP(RC_RENO))  u_reno  (.clk, .rst_n, .start, .alpha, .beta, .fi_alpha, .fi_beta,
                                     .busy(busy[1]), .done(done[1]), .rho(rho[1]), .fault(fault[1]));
  mbrfd #(.RECOMP(RC_RESO))  u_reso  (.clk, .rst_n, .start, .alpha, .beta, .fi_alpha, .fi_beta,
                                     .busy(busy[2]), .done(done[2]), .rho(rho[2]), .fault(fault[2]));

  always #5 clk = ~clk;

  function automatic longint barrett_r(longint c);
    return c - ((c * MU) >> 24) * Q;
  endfunction

  function automatic bit expect_fault(int a, int b, int fa, int fb);
    bit f = 0;
    for (int i = 0; i < NW; i++)
      for (int j = 0; j < NW; j++) begin
        longint aw = (a >> (i * W)) & 15, bw = (b >> (j * W)) & 15;
        longint awf = ((a ^ fa) >> (i * W)) & 15, bwf = ((b ^ fb) >> (j * W)) & 15;
        if (barrett_r((aw * bw) << ((i + j) * W)) != barrett_r((awf * bwf) << ((i + j) * W))) f = 1;
      end
    return f;
  endfunction

  task automatic one(int a, int b, int fa, int fb);
    int lat = 0;
    int exp_rho;
    bit exp_f;
    @(negedge clk);
    alpha = 12'(a); beta = 12'(b); fi_alpha = 12'(fa); fi_beta = 12'(fb); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (done[0] !== 1'b1) begin @(negedge clk); lat++; end
    exp_rho = int'((longint'(a ^ fa) * longint'(b ^ fb)) % Q);
    exp_f = expect_fault(a, b, fa, fb);
    if (exp_f) n_detect++; else n_clean++;
    for (int v = 0; v < 3; v++) begin
      checks++;
      if (done[v] !== 1'b1 || int'(rho[v]) != exp_rho || fault[v] != exp_f) begin
        failures++;
        if (failures < 10)
          $display("FAIL unit %0d a=%0d b=%0d fa=%h fb=%h rho=%0d exp=%0d fault=%b exp=%b",
                   v, a, b, fa, fb, rho[v], exp_rho, fault[v], exp_f);
      end
    end
    checks++;
    if (lat != NW * NW + 2) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // corner cases
    one(0, 0, 0, 0);
    one(Q - 1, Q - 1, 0, 0);
    one(4095, 4095, 0, 0);
    one(1, 1, 0, 0);
    // clean random
    for (int n = 0; n < 300; n++) one(int'($urandom_range(4095)), int'($urandom_range(4095)), 0, 0);
    // random faults of 1..5 bits in alpha, beta or both
    for (int n = 0; n < 300; n++) begin
      int fa, fb, nb, mode;
      fa = 0; fb = 0; nb = int'($urandom_range(1, 5)); mode = n % 3;
      for (int k = 0; k < nb; k++) begin
        if (mode != 1) fa |= 1 << $urandom_range(11);
        if (mode != 0) fb |= 1 << $urandom_range(11);
      end
      one(int'($urandom_range(1, 4095)), int'($urandom_range(1, 4095)), fa, fb);
    end
    // burst faults
    for (int n = 0; n < 100; n++) begin
      int len, pos, m;
      len = int'($urandom_range(1, 6));
      pos = int'($urandom_range(0, 12 - len));
      m   = ((1 << len) - 1) << pos;
      one(int'($urandom_range(1, 4095)), int'($urandom_range(1, 4095)), (n % 2) ? m : 0, (n % 2) ? 0 : m);
    end
    $display("faulty multiplications flagged: %0d, unflagged: %0d", n_detect, n_clean);
    checks++;
    if (n_detect == 0) begin failures++; $display("FAIL no fault detected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
