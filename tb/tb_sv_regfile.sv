// tb_sv_regfile: random writes and reads of the physical register file
// against a plain array; register 0 must read zero and ignore writes.
`timescale 1ns/1ps
module tb_sv_regfile;
  localparam int NP = 48;
  logic clk = 0, rst_n = 0, we = 0;
  logic [5:0] ra, rb, wa;
  logic [31:0] da, db, wd;
  always #5 clk = ~clk;
  sv_regfile #(.NUM_PREGS(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .rdata_a_o(da),
                                    .raddr_b_i(rb), .rdata_b_o(db), .we_i(we), .waddr_i(wa), .wdata_i(wd));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [31:0] model [NP];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (model[i]) model[i] = 0;
    ra = 0; rb = 0; wa = 0; wd = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NP; i++) begin
      ra = 6'(i); #1 check(da == 0, "reset to zero");
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom_range(1); wa = 6'($urandom_range(NP - 1)); wd = $urandom();
      ra = 6'($urandom_range(NP - 1)); rb = 6'($urandom_range(NP - 1));
      #1;
      check(da == model[ra], $sformatf("port a reg %0d: %h vs %h", ra, da, model[ra]));
      check(db == model[rb], $sformatf("port b reg %0d", rb));
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
