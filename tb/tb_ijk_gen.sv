// tb_ijk_gen: steps the NTT index generator through a whole Kyber NTT and
// compares each butterfly's addresses (j, j+t) and twiddle index (m+i) with
// the nested loops of the iterative Cooley-Tukey algorithm run here
// (t = 128 .. 2, m = 1 .. 64). last must be high exactly on butterfly 896.
// The generator is stepped with random gaps to check it holds its state.
module tb_ijk_gen;
  logic clk = 0, rst_n = 0, init = 0, step = 0;
  logic [7:0] aj, ajt;
  logic [6:0] tw_idx;
  logic last;
  int checks = 0, failures = 0;

  ijk_gen dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int count = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int t = 128, m = 1; m < 128; t = t / 2, m = m * 2) begin
      int k;
      k = 0;
      for (int i = 0; i < m; i++) begin
        for (int j = k; j < k + t; j++) begin
          count++;
          chk(int'(aj) == j && int'(ajt) == j + t && int'(tw_idx) == m + i,
              $sformatf("bfly %0d: aj=%0d ajt=%0d tw=%0d exp %0d %0d %0d", count, aj, ajt, tw_idx, j, j + t, m + i));
          chk(last == (count == 896), $sformatf("last=%b at %0d", last, count));
          repeat ($urandom_range(2)) @(negedge clk);
          step = 1;
          @(negedge clk); step = 0;
        end
        k = k + 2 * t;
      end
    end
    chk(count == 896, "butterfly count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
