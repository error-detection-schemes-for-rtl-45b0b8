// mbrfd_coverage_bench: fault-injection campaign on one mbrfd configuration
// with l = 24 and q = 8380417, in the style of the error-coverage study:
// for fault sizes eta = 1, 3, 5, 11, 17, 23 bits, faults in alpha, in beta
// or in both (eta bits in each), at random bit positions or as a burst of
// eta adjacent bits, SAMPLES random operand pairs per case. Every run is
// checked: rho must be the product of the (faulty) operands mod q, and the
// fault flag must match this bench's word-by-word prediction (some word
// step's Barrett remainder changed). The detection rate, flagged /
// injected, is printed per configuration.
module mbrfd_coverage_bench
  import ntt_fd_pkg::*;
#(
  parameter int unsigned W       = 4,
  parameter recomp_e     RECOMP  = RC_RESWO,
  parameter int          SAMPLES = 400,
  parameter string       NAME    = "reswo"
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned L = 24;
  localparam longint      Q = 8380417;
  localparam int unsigned NW = L / W;
  localparam longint      MU = (64'd1 << 48) / Q;

  logic rst_n = 0, start = 0, busy, done, fault;
  logic [L-1:0] alpha = '0, beta = '0, fi_alpha = '0, fi_beta = '0, rho;
  int injected = 0, flagged = 0;

  mbrfd #(.L(L), .W(W), .Q(Q), .RECOMP(RECOMP)) dut (.*);

  initial begin finished = 0; checks = 0; failures = 0; end

  function automatic longint br(longint c);
    return c - ((c * MU) >> 48) * Q;
  endfunction

  function automatic bit predict(longint a, longint b, longint fa, longint fb);
    longint m = (64'd1 << W) - 1;
    for (int i = 0; i < NW; i++)
      for (int j = 0; j < NW; j++) begin
        longint c0 = (((a >> (i * W)) & m) * ((b >> (j * W)) & m)) << ((i + j) * W);
        longint c1 = ((((a ^ fa) >> (i * W)) & m) * (((b ^ fb) >> (j * W)) & m)) << ((i + j) * W);
        if (br(c0) != br(c1)) return 1;
      end
    return 0;
  endfunction

  function automatic longint mask(int eta, bit burst);
    longint mk = 0;
    if (burst) begin
      int pos = int'($urandom_range(0, L - eta));
      return ((64'd1 << eta) - 1) << pos;
    end
    while ($countones(mk) < eta) mk |= 64'd1 << $urandom_range(L - 1);
    return mk;
  endfunction

  initial begin
    int etas [6] = '{1, 3, 5, 11, 17, 23};
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (etas[e])
      for (int mode = 0; mode < 3; mode++)
        for (int burst = 0; burst < 2; burst++) begin
          if (etas[e] == 1 && burst == 1) continue;
          for (int s = 0; s < SAMPLES; s++) begin
            longint a, b, fa, fb, exp_rho;
            bit exp_f;
            a  = longint'($urandom) % Q;
            b  = longint'($urandom) % Q;
            fa = (mode != 1) ? mask(etas[e], burst[0]) : 0;
            fb = (mode != 0) ? mask(etas[e], burst[0]) : 0;
            @(negedge clk);
            alpha = L'(a); beta = L'(b); fi_alpha = L'(fa); fi_beta = L'(fb); start = 1;
            @(negedge clk); start = 0;
            while (!done) @(negedge clk);
            exp_rho = ((a ^ fa) * (b ^ fb)) % Q;
            exp_f = predict(a, b, fa, fb);
            injected++;
            if (fault) flagged++;
            checks++;
            if (longint'(rho) != exp_rho || fault != exp_f) begin
              failures++;
              if (failures < 10) $display("FAIL [%s] a=%h b=%h fa=%h fb=%h rho=%h exp=%h f=%b exp=%b",
                                          NAME, a, b, fa, fb, rho, exp_rho, fault, exp_f);
            end
          end
        end
    $display("[%s w=%0d] injected %0d faults, flagged %0d (%0d.%02d %%)", NAME, W, injected, flagged,
             flagged * 100 / injected, (flagged * 10000 / injected) % 100);
    finished = 1;
  end
endmodule
