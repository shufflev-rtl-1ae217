// tb_sv_csr: reset value of the ShuffleV control register, writes and the
// decoded control outputs, and the cycle counter.
`timescale 1ns/1ps
module tb_sv_csr;
  logic clk = 0, rst_n = 0, we = 0;
  logic [11:0] addr = 0;
  logic [31:0] wd = 0, rd;
  logic sh, dm, mo;
  logic [1:0] sel;
  always #5 clk = ~clk;
  sv_csr dut (.clk_i(clk), .rst_ni(rst_n), .addr_i(addr), .we_i(we), .wdata_i(wd), .rdata_o(rd),
              .shuffle_en_o(sh), .dummy_en_o(dm), .dummy_sel_o(sel), .mem_opt_en_o(mo));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] c0, c1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    addr = 12'h7C1; #1;
    check(rd == 32'h19, "reset: shuffle on, dummy off, interval select 2, memory optimisation on");
    check(sh == 1 && dm == 0 && sel == 2 && mo == 1, "reset outputs");
    for (int v = 0; v < 32; v++) begin
      @(negedge clk); we = 1; wd = 32'(v) | 32'hFFF0_0000;
      @(negedge clk); we = 0;
      check(rd == 32'(v), $sformatf("read back %0d", v));
      check(sh == v[0] && dm == v[1] && sel == 2'(v >> 2) && mo == v[4], "decoded outputs");
    end
    @(negedge clk); addr = 12'h123; we = 1; wd = 0;
    @(negedge clk); we = 0; addr = 12'h7C1; #1;
    check(rd == 32'h1F, "write to another address ignored");
    addr = 12'hC00; #1 c0 = rd;
    repeat (10) @(negedge clk);
    c1 = rd;
    check(c1 - c0 == 10, $sformatf("cycle counter advanced %0d", c1 - c0));
    addr = 12'hC80; #1 check(rd == 0, "cycleh");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
