// tb_twiddle_rom: reads all 128 entries of the Kyber twiddle table and
// compares them with 17^bitrev7(idx) mod 3329 computed here by repeated
// multiplication, plus a few published Kyber zetas (1729, 2580, 3289, 2642).
module tb_twiddle_rom;
  logic clk = 0;
  logic [6:0] idx = '0;
  logic [11:0] w;
  int checks = 0, failures = 0;

  twiddle_rom dut (.*);
  always #5 clk = ~clk;

  function automatic int expected(int i);
    int e = 0, r = 1;
    for (int b = 0; b < 7; b++) if (i & (1 << b)) e |= 1 << (6 - b);
    for (int k = 0; k < e; k++) r = (r * 17) % 3329;
    return r;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int known [4] = '{1729, 2580, 3289, 2642};
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); idx = 7'(i);
      @(negedge clk);
      checks++;
      if (int'(w) != expected(i)) begin
        failures++;
        $display("FAIL idx %0d w %0d exp %0d", i, w, expected(i));
      end
      if (i >= 1 && i <= 4) begin
        checks++;
        if (int'(w) != known[i - 1]) begin failures++; $display("FAIL known zeta %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
