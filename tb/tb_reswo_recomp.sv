// tb_reswo_recomp: exhaustive test of the RESWO recomputation unit at the
// Kyber size (l = 12, w = 4, q = 3329). For every word pair and word offset
// the recomputed remainder must equal, bit for bit, the Barrett remainder
// of the unencoded operands, c - floor(c*mu/2^24)*q with
// c = aw*bw*2^((i+j)w), computed here with plain integer arithmetic; the
// comparator of the fault detector relies on that equality.
module tb_reswo_recomp;
  localparam int Q = 3329;
  localparam longint MU = (64'd1 << 24) / Q;

  logic [3:0] aw, bw;
  logic [2:0] shw;
  logic [12:0] rf;
  int checks = 0, failures = 0;

  reswo_recomp dut (.aw, .bw, .shw, .rf);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s <= 4; s++)
      for (int a = 0; a < 16; a++)
        for (int b = 0; b < 16; b++) begin
          longint c, exp_r;
          aw = 4'(a); bw = 4'(b); shw = 3'(s);
          #1;
          c = longint'(a * b) << (4 * s);
          exp_r = c - ((c * MU) >> 24) * Q;
          checks++;
          if (longint'(rf) != exp_r) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d s=%0d rf=%0d exp=%0d", a, b, s, rf, exp_r);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
