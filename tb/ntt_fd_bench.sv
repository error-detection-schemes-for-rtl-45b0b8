// ntt_fd_bench: reusable end-to-end bench for one ntt_fd_top configuration.
//
// Loads a random polynomial through the external port, runs one NTT and
// compares every output with a reference NTT computed here (the iterative
// Cooley-Tukey loops with twiddle ZETA^bitrev(m+i) mod Q), checks the cycle
// count LAYERS*N/2 * (NW*NW + 10) + 1 and the absence of fault reports, then
// reruns the NTT with a one-bit fault in the main path's coefficient operand
// and requires every butterfly to be flagged. It raises finished when done
// and reports its counts on checks / failures. Used by the workload benches.
module ntt_fd_bench
  import ntt_fd_pkg::*;
#(
  parameter int unsigned N      = 256,
  parameter int unsigned L      = 12,
  parameter int unsigned W      = 4,
  parameter int unsigned Q      = 3329,
  parameter int unsigned LAYERS = 7,
  parameter int unsigned ZETA   = 17,
  parameter recomp_e     RECOMP = RC_RESWO,
  parameter string       NAME   = "kyber"
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int AW = $clog2(N);
  localparam int NW = L / W;
  localparam int BFLY = LAYERS * N / 2;
  localparam int CW = $clog2(BFLY + 1);

  logic rst_n = 0, start = 0;
  logic busy, done, fault_flag;
  logic [CW-1:0] fault_count;
  logic [AW-1:0] ext_addr = '0;
  logic ext_we = 0;
  logic [L-1:0] ext_din = '0, ext_dout;
  logic [L-1:0] fi_alpha = '0, fi_beta = '0;

  ntt_fd_top #(.N(N), .L(L), .W(W), .Q(Q), .LAYERS(LAYERS), .ZETA(ZETA), .RECOMP(RECOMP)) dut (.*);

  longint poly [N];
  longint ref_p [N];

  initial begin
    finished = 0;
    checks = 0;
    failures = 0;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [%s]: %s", NAME, what);
    end
  endtask

  function automatic longint pm(longint b, longint e);
    longint r = 1;
    while (e > 0) begin
      if (e % 2 == 1) r = (r * b) % Q;
      b = (b * b) % Q;
      e = e / 2;
    end
    return r;
  endfunction

  function automatic longint brv(longint x);
    longint y = 0;
    for (int b = 0; b < LAYERS; b++) if ((x >> b) & 1) y |= 64'd1 << (LAYERS - 1 - b);
    return y;
  endfunction

  task automatic ref_ntt();
    int t = N / 2;
    for (int m = 1; m < (1 << LAYERS); m = m * 2) begin
      for (int i = 0; i < m; i++) begin
        longint z = pm(ZETA, brv(m + i));
        for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
          longint v = (z * ref_p[j + t]) % Q;
          ref_p[j + t] = (ref_p[j] - v + Q) % Q;
          ref_p[j]     = (ref_p[j] + v) % Q;
        end
      end
      t = t / 2;
    end
  endtask

  task automatic load_poly();
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      ext_addr = AW'(a); ext_we = 1; ext_din = L'(poly[a]);
    end
    @(negedge clk); ext_we = 0;
  endtask

  task automatic run_ntt(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < N; a++) poly[a] = longint'($urandom) % Q;
    ref_p = poly;
    ref_ntt();
    load_poly();
    run_ntt(cyc);
    chk(cyc == BFLY * (NW * NW + 10) + 1, $sformatf("cycles %0d", cyc));
    chk(fault_count == 0 && !fault_flag, "fault in clean run");
    for (int a = 0; a <= N; a++) begin
      @(negedge clk);
      if (a > 0) chk(longint'(ext_dout) == ref_p[a - 1], $sformatf("out[%0d]=%0d exp %0d", a - 1, ext_dout, ref_p[a - 1]));
      if (a < N) ext_addr = AW'(a);
    end
    load_poly();
    fi_alpha = L'(1) << (L / 2);
    run_ntt(cyc);
    fi_alpha = '0;
    chk(int'(fault_count) == BFLY && fault_flag, $sformatf("faults flagged %0d of %0d", fault_count, BFLY));
    $display("[%s] NTT of %0d coefficients mod %0d: %0d cycles, injected faults flagged %0d/%0d",
             NAME, N, Q, cyc, fault_count, BFLY);
    finished = 1;
  end
endmodule
