// tb_ntt_fd_top: end-to-end test of the fault-detecting NTT engine at its
// default (Kyber) size: n = 256, q = 3329, l = 12, w = 4, 7 layers, RESWO.
//
// 1. Loads a random polynomial through the external port and reads it back.
// 2. Runs one NTT and compares all 256 outputs with a reference NTT written
//    here in the usual Kyber form (zetas 17^bitrev7(k) mod q, len = 128..2),
//    checks the cycle count (896 butterflies of NW*NW + 10 cycles, plus one)
//    and that no fault is reported. While the NTT runs, the external port
//    must read zero (the demux gives the memory to the NTT).
// 3. Runs the NTT again with a one-bit fault in the coefficient operand of
//    the main Barrett path: every butterfly must be flagged (the twiddles
//    are nonzero, so the faulty word product always differs).
// 4. Runs it with a one-bit fault in the twiddle operand: some butterflies
//    must be flagged.
// Mechanisms counted: external/NTT ownership switch, fault detections, the
// "r >= q" and "rho >= q" corrections of the Barrett accumulator, and the
// wrap-around of the modular adder and subtractor.
module tb_ntt_fd_top;
  import ntt_fd_pkg::*;

  localparam int N = KYBER_N;
  localparam int Q = KYBER_Q;
  localparam int L = KYBER_L;
  localparam int W = KYBER_W;
  localparam int NW = L / W;
  localparam int BFLY = KYBER_LAYERS * N / 2;
  localparam int CYC_PER_BFLY = NW * NW + 10;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, fault_flag;
  logic [$clog2(BFLY+1)-1:0] fault_count;
  logic [7:0]  ext_addr = '0;
  logic        ext_we = 0;
  logic [11:0] ext_din = '0, ext_dout;
  logic [11:0] fi_alpha = '0, fi_beta = '0;

  ntt_fd_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_own_switch = 0, n_fault = 0, n_r_sub = 0, n_rho_sub = 0, n_add_wrap = 0, n_sub_wrap = 0;
  int poly [N];
  int ref_p [N];
  int zetas [128];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // independent reference NTT
  function automatic int pm(int b, int e);
    longint r = 1, bb = b;
    while (e > 0) begin
      if (e % 2 == 1) r = (r * bb) % Q;
      bb = (bb * bb) % Q;
      e = e / 2;
    end
    return int'(r);
  endfunction

  function automatic int brv7(int x);
    int y = 0;
    for (int b = 0; b < 7; b++) if (x & (1 << b)) y |= 1 << (6 - b);
    return y;
  endfunction

  task automatic ref_ntt();
    int k = 1;
    for (int len = 128; len >= 2; len = len / 2)
      for (int st = 0; st < N; st += 2 * len) begin
        int z = zetas[k++];
        for (int j = st; j < st + len; j++) begin
          int t = int'((longint'(z) * ref_p[j + len]) % Q);
          ref_p[j + len] = (ref_p[j] - t + Q) % Q;
          ref_p[j]       = (ref_p[j] + t) % Q;
        end
      end
  endtask

  task automatic load_poly();
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      ext_addr = 8'(a); ext_we = 1; ext_din = 12'(poly[a]);
    end
    @(negedge clk); ext_we = 0;
  endtask

  task automatic read_poly(output int res [N]);
    for (int a = 0; a <= N; a++) begin
      @(negedge clk);
      if (a > 0) res[a - 1] = int'(ext_dout);
      if (a < N) ext_addr = 8'(a);
    end
  endtask

  task automatic run_ntt(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
      if (busy && ext_dout != 0) begin
        check(0, "external port not blocked while NTT owns memory");
      end
    end
  endtask

  // mechanism counters by observing the datapath
  always @(posedge clk) if (rst_n) begin
    if (dut.u_bu.u_mbrfd.s2_valid) begin
      if (dut.u_bu.u_mbrfd.s2_r >= 13'(Q)) n_r_sub++;
      if (dut.u_bu.u_mbrfd.sum >= 13'(Q)) n_rho_sub++;
    end
    if (dut.u_bu.m_done) begin
      if (32'(dut.u_bu.u_q) + 32'(dut.u_bu.v) >= Q) n_add_wrap++;
      if (dut.u_bu.u_q < dut.u_bu.v) n_sub_wrap++;
    end
  end
  logic busy_d = 0;
  always @(posedge clk) begin
    busy_d <= busy;
    if (busy != busy_d) n_own_switch++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int res [N];
    int cyc;
    int fc_beta;
    for (int k = 0; k < 128; k++) zetas[k] = pm(17, brv7(k));
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. load and read back
    for (int a = 0; a < N; a++) poly[a] = int'($urandom_range(Q - 1));
    load_poly();
    read_poly(res);
    for (int a = 0; a < N; a++) check(res[a] == poly[a], $sformatf("readback %0d", a));

    // 2. clean NTT
    ref_p = poly;
    ref_ntt();
    run_ntt(cyc);
    check(cyc == BFLY * CYC_PER_BFLY + 1, $sformatf("NTT cycles %0d, expected %0d", cyc, BFLY * CYC_PER_BFLY + 1));
    check(fault_flag == 0 && fault_count == 0, "fault reported in clean run");
    read_poly(res);
    for (int a = 0; a < N; a++)
      check(res[a] == ref_p[a], $sformatf("NTT out[%0d] = %0d, expected %0d", a, res[a], ref_p[a]));
    $display("clean NTT: %0d cycles", cyc);

    // 3. fault in alpha (coefficient operand), bit 0
    load_poly();
    fi_alpha = 12'h001;
    run_ntt(cyc);
    fi_alpha = '0;
    check(fault_flag == 1, "alpha fault not flagged");
    check(int'(fault_count) == BFLY, $sformatf("alpha fault count %0d, expected %0d", fault_count, BFLY));
    n_fault += int'(fault_count);

    // 4. fault in beta (twiddle operand), bit 11
    load_poly();
    fi_beta = 12'h800;
    run_ntt(cyc);
    fi_beta = '0;
    fc_beta = int'(fault_count);
    check(fault_flag == 1 && fc_beta > 0 && fc_beta <= BFLY, $sformatf("beta fault count %0d", fc_beta));
    n_fault += fc_beta;

    $display("mechanisms: ownership switches=%0d faults detected=%0d r>=q=%0d rho>=q=%0d add wrap=%0d sub wrap=%0d",
             n_own_switch, n_fault, n_r_sub, n_rho_sub, n_add_wrap, n_sub_wrap);
    check(n_own_switch > 0, "ownership switch never happened");
    check(n_fault > 0, "fault detection never happened");
    check(n_r_sub > 0, "r >= q correction never happened");
    check(n_rho_sub > 0, "rho >= q correction never happened");
    check(n_add_wrap > 0, "adder wrap never happened");
    check(n_sub_wrap > 0, "subtractor wrap never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
