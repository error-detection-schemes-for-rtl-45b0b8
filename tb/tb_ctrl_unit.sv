// tb_ctrl_unit: runs the control unit with the real index generator, a
// memory model and a stand-in butterfly whose result is easy to predict
// (y0 = u XOR x, y1 = (u + x + 1) mod 4096, fault when x is odd, result
// sampled LATB + 1 edges after accepting, like the real CT-BU's NW*NW + 4).
// After a complete run the memory must equal
// the same stand-in transform applied in the NTT's loop order, fault_count
// must equal the number of odd x seen, done must come after
// 896 * (LATB + 7) + 1 cycles, and the memory must be owned by the
// controller (sel_ntt) exactly while busy.
module tb_ctrl_unit;
  localparam int LATB = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, fault_flag;
  logic [9:0] fault_count;
  logic ijk_init, ijk_step, ijk_last;
  logic [7:0] aj, ajt;
  logic [6:0] tw_idx;
  logic sel_ntt, mem_we;
  logic [7:0] mem_addr;
  logic [11:0] mem_din, mem_dout;
  logic bu_in_valid, bu_in_ready, bu_out_valid, bu_fault;
  logic [11:0] bu_u, bu_x, bu_y0, bu_y1;
  logic [11:0] mem [256];
  int model [256];
  int checks = 0, failures = 0;

  ctrl_unit dut (.*);
  ijk_gen u_ijk (.clk, .rst_n, .init(ijk_init), .step(ijk_step), .aj, .ajt, .tw_idx, .last(ijk_last));

  always #5 clk = ~clk;

  // memory model: synchronous read, read-before-write
  always_ff @(posedge clk) begin
    if (mem_we) mem[mem_addr] <= mem_din;
    mem_dout <= mem[mem_addr];
  end

  // stand-in butterfly
  int cnt = -1;
  logic [11:0] hu, hx;
  always_ff @(posedge clk) begin
    bu_out_valid <= 1'b0;
    if (!rst_n) begin
      cnt <= -1;
    end else if (bu_in_valid && bu_in_ready) begin
      hu <= bu_u; hx <= bu_x; cnt <= LATB - 1;
    end else if (cnt > 0) begin
      cnt <= cnt - 1;
    end else if (cnt == 0) begin
      bu_out_valid <= 1'b1;
      bu_y0 <= hu ^ hx;
      bu_y1 <= hu + hx + 12'd1;
      bu_fault <= hx[0];
      cnt <= -1;
    end
  end
  assign bu_in_ready = (cnt < 0);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (sel_ntt != busy) begin failures++; $display("FAIL sel_ntt != busy"); end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, exp_faults;
    for (int a = 0; a < 256; a++) begin
      mem[a] = 12'($urandom);
      model[a] = int'(mem[a]);
    end
    exp_faults = 0;
    for (int t = 128, m = 1; m < 128; t = t / 2, m = m * 2)
      for (int i = 0; i < m; i++)
        for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
          int u, x;
          u = model[j]; x = model[j + t];
          if (x % 2 == 1) exp_faults++;
          model[j] = u ^ x;
          model[j + t] = (u + x + 1) % 4096;
        end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !sel_ntt, "busy after reset");
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == 896 * (LATB + 7) + 1, $sformatf("cycles %0d exp %0d", cyc, 896 * (LATB + 7) + 1));
    chk(int'(fault_count) == exp_faults && fault_flag == (exp_faults > 0),
        $sformatf("fault_count %0d exp %0d", fault_count, exp_faults));
    for (int a = 0; a < 256; a++)
      chk(int'(mem[a]) == model[a], $sformatf("mem[%0d]=%0d exp %0d", a, mem[a], model[a]));
    chk(!busy, "busy after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
