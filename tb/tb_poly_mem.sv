// tb_poly_mem: writes random words to all 256 addresses of the coefficient
// memory, then reads them back in random order against a shadow copy,
// checking the one-cycle read latency and that a write cycle returns the
// old word (read-before-write).
module tb_poly_mem;
  logic clk = 0;
  logic [7:0] addr = '0;
  logic rd_wr_en = 0;
  logic [11:0] din = '0, dout;
  logic [11:0] shadow [256];
  int checks = 0, failures = 0;

  poly_mem dut (.*);
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
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      addr = 8'(a); rd_wr_en = 1; din = 12'($urandom); shadow[a] = din;
    end
    @(negedge clk); rd_wr_en = 0;
    for (int n = 0; n < 1000; n++) begin
      int a;
      bit wr;
      logic [11:0] nd;
      a  = int'($urandom_range(255));
      wr = ($urandom_range(3) == 0);
      nd = 12'($urandom);
      @(negedge clk);
      addr = 8'(a); rd_wr_en = wr; din = nd;
      @(negedge clk);
      rd_wr_en = 0;
      chk(dout == shadow[a], $sformatf("addr %0d dout %h exp %h", a, dout, shadow[a]));
      if (wr) shadow[a] = nd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
