// tb_mem_mux: drives random requests on both sides of the memory mux and
// checks that the selected owner's address, write enable and data reach the
// memory and that read data goes only to the owner (zero to the other).
module tb_mem_mux;
  logic sel_ntt;
  logic [7:0] ntt_addr, ext_addr, mem_addr;
  logic ntt_we, ext_we, mem_we;
  logic [11:0] ntt_din, ext_din, mem_din, mem_dout, ntt_dout, ext_dout;
  int checks = 0, failures = 0;

  mem_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      sel_ntt = 1'($urandom); ntt_addr = 8'($urandom); ext_addr = 8'($urandom);
      ntt_we = 1'($urandom); ext_we = 1'($urandom);
      ntt_din = 12'($urandom); ext_din = 12'($urandom); mem_dout = 12'($urandom | 1);
      #1;
      checks++;
      if (sel_ntt ? (mem_addr != ntt_addr || mem_we != ntt_we || mem_din != ntt_din ||
                     ntt_dout != mem_dout || ext_dout != 0)
                  : (mem_addr != ext_addr || mem_we != ext_we || mem_din != ext_din ||
                     ext_dout != mem_dout || ntt_dout != 0)) begin
        failures++;
        if (failures < 10) $display("FAIL sel=%b", sel_ntt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
