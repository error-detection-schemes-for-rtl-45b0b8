// tb_barrett_reduce: exhaustive test of one word step of the word-wise
// Barrett reduction at the Kyber size (l = 12, w = 4, q = 3329).
// For every word pair and every word offset i+j it checks that r is
// congruent to c = aw*bw*2^((i+j)w) mod q, that r < 2q, and that r equals
// the textbook Barrett remainder c - floor(c*mu/2^24)*q, mu = floor(2^24/q),
// all computed here with plain integer arithmetic.
module tb_barrett_reduce;
  localparam int Q = 3329;
  localparam longint MU = (64'd1 << 24) / Q;

  logic [3:0] aw, bw;
  logic [2:0] shw;
  logic [12:0] r;
  int checks = 0, failures = 0;

  barrett_reduce dut (.aw, .bw, .shw, .r);

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
          if (longint'(r) != exp_r || (longint'(r) % Q) != (c % Q) || r >= 2 * Q) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d s=%0d r=%0d exp=%0d", a, b, s, r, exp_r);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
