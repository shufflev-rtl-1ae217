// tb_sv_predecode: checks the instruction classifier on hand-encoded
// instructions of every class: register usage, x0 handling, memory offset and
// size, control-flow class and the serializing instructions.
`timescale 1ns/1ps
module tb_sv_predecode;
  import shufflev_pkg::*;
  import rv_tb_pkg::*;
  logic [31:0] instr;
  predec_t pd;
  sv_predecode dut (.instr_i(instr), .pd_o(pd));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s (instr %h)", what, instr); end
  endtask

  task automatic expect_pd(logic [31:0] i, bit u1, bit u2, bit w, int rs1, int rs2, int rd,
                           cf_e cf, mem_e mem, int off, int sz, bit ser);
    instr = i; #1;
    check(pd.uses_rs1 == u1 && pd.uses_rs2 == u2 && pd.writes_rd == w, "register usage");
    if (u1) check(pd.rs1 == 5'(rs1), "rs1");
    if (u2) check(pd.rs2 == 5'(rs2), "rs2");
    if (w)  check(pd.rd == 5'(rd), "rd");
    check(pd.cf == cf, "control-flow class");
    check(pd.mem == mem, "memory class");
    if (mem != MEM_NONE) begin
      check(pd.mem_off == 12'(off), "offset");
      check(pd.mem_size == 2'(sz), "size");
    end
    check(pd.serial == ser, "serializing");
  endtask

  initial begin
    expect_pd(ADD(3, 1, 2),        1, 1, 1, 1, 2, 3,  CF_NONE,   MEM_NONE,  0, 0, 0);
    expect_pd(ADD(0, 1, 2),        1, 1, 0, 1, 2, 0,  CF_NONE,   MEM_NONE,  0, 0, 0);
    expect_pd(ADDI(5, 6, -3),      1, 0, 1, 6, 0, 5,  CF_NONE,   MEM_NONE,  0, 0, 0);
    expect_pd(LUI(7, 5),           0, 0, 1, 0, 0, 7,  CF_NONE,   MEM_NONE,  0, 0, 0);
    expect_pd(LW(5, 1, 8),         1, 0, 1, 1, 0, 5,  CF_NONE,   MEM_LOAD,  8, 2, 0);
    expect_pd(enc_i(-4, 2, 3'b000, 9, 7'b0000011), 1, 0, 1, 2, 0, 9, CF_NONE, MEM_LOAD, -4, 0, 0); // LB
    expect_pd(SW(9, 2, 0),         1, 1, 0, 2, 9, 0,  CF_NONE,   MEM_STORE, 0, 2, 0);
    expect_pd(enc_s(-6, 4, 3, 3'b001), 1, 1, 0, 3, 4, 0, CF_NONE, MEM_STORE, -6, 1, 0); // SH
    expect_pd(BNE(2, 3, 16),       1, 1, 0, 2, 3, 0,  CF_BRANCH, MEM_NONE,  0, 0, 0);
    expect_pd(JAL(1, 64),          0, 0, 1, 0, 0, 1,  CF_JAL,    MEM_NONE,  0, 0, 0);
    expect_pd(JALR(0, 1, 0),       1, 0, 0, 1, 0, 0,  CF_JALR,   MEM_NONE,  0, 0, 0);
    expect_pd(FENCE(),             0, 0, 0, 0, 0, 0,  CF_NONE,   MEM_NONE,  0, 0, 1);
    expect_pd(32'h0000100f,        0, 0, 0, 0, 0, 0,  CF_NONE,   MEM_NONE,  0, 0, 1);  // FENCE.I
    expect_pd(32'h00000073,        0, 0, 0, 0, 0, 0,  CF_NONE,   MEM_NONE,  0, 0, 1);  // ECALL
    expect_pd(32'h00100073,        0, 0, 0, 0, 0, 0,  CF_NONE,   MEM_NONE,  0, 0, 1);  // EBREAK
    expect_pd(CSRRW(4, 'h7C1, 6),  1, 0, 1, 6, 0, 4,  CF_NONE,   MEM_NONE,  0, 0, 1);
    expect_pd(CSRRWI(4, 'h7C1, 6), 0, 0, 1, 0, 0, 4,  CF_NONE,   MEM_NONE,  0, 0, 1);
    expect_pd(MUL(8, 9, 10),       1, 1, 1, 9, 10, 8, CF_NONE,   MEM_NONE,  0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
