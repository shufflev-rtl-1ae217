// tb_sv_rename: identity mapping after reset, translation of sources,
// allocation of the lowest free register, the rule that a register is free
// only when it is neither mapped nor referenced by a buffer entry, x0 never
// renamed, and alloc_ok_o dropping when every register is in use.
`timescale 1ns/1ps
module tb_sv_rename;
  localparam int NP = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] rs1 = 0, rs2 = 0, rd = 0;
  logic [5:0] p1, p2, pd;
  logic alloc = 0, ok;
  logic [NP-1:0] refv = '0;
  sv_rename #(.NUM_PREGS(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .rs1_i(rs1), .rs2_i(rs2), .rs1_p_o(p1), .rs2_p_o(p2),
                                   .rd_i(rd), .alloc_i(alloc), .rd_p_o(pd), .alloc_ok_o(ok), .ref_i(refv));
  int checks = 0, failures = 0;
  task automatic check(bit ok_, string what);
    checks++; if (!ok_) begin failures++; $display("FAIL: %s", what); end
  endtask
  int model [32];
  function automatic int lowest_free(logic [NP-1:0] r);
    bit used [NP];
    foreach (used[i]) used[i] = r[i];
    foreach (model[i]) used[model[i]] = 1;
    for (int i = 1; i < NP; i++) if (!used[i]) return i;
    return -1;
  endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (model[i]) model[i] = i;
    for (int i = 0; i < 32; i++) begin rs1 = 5'(i); rs2 = 5'(31 - i); #1 check(p1 == 6'(i) && p2 == 6'(31 - i), "identity after reset"); end
    check(ok && pd == 32, "first free register is 32");
    // random rename traffic with random references
    for (int n = 0; n < 3000; n++) begin
      int lf;
      @(negedge clk);
      refv = '0;
      for (int k = 0; k < 4; k++) refv[$urandom_range(NP - 1)] = 1'b1;
      rd = 5'($urandom_range(31)); rs1 = 5'($urandom_range(31)); rs2 = 5'($urandom_range(31));
      alloc = $urandom_range(1);
      #1;
      lf = lowest_free(refv);
      check(p1 == 6'(model[rs1]) && p2 == 6'(model[rs2]), "source lookup");
      check(ok == (lf >= 0), "alloc_ok");
      if (lf >= 0) check(pd == 6'(lf), $sformatf("lowest free %0d vs %0d", pd, lf));
      @(posedge clk);
      if (alloc && lf >= 0 && rd != 0) model[rd] = lf;
    end
    // x0 stays on physical 0
    rs1 = 0; #1 check(p1 == 0, "x0 maps to physical 0");
    // exhaust: reference everything not mapped
    @(negedge clk); alloc = 0;
    refv = '1; #1 check(!ok, "no free register when all are referenced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
