// tb_sv_dummy_gen: with insertion enabled, the number of real instructions
// between two dummies never exceeds the selected interval (4, 8, 16) and
// varies; every dummy is ADD, AND, MUL or MULH writing x0 with operands inside
// the physical register range; all four operations occur; nothing is due
// while insertion is disabled.
`timescale 1ns/1ps
module tb_sv_dummy_gen;
  localparam int NP = 48;
  logic clk = 0, rst_n = 0, en = 0, real_iss = 0, fire = 0, due;
  logic [1:0] sel = 0;
  logic [31:0] rnd, instr;
  logic [5:0] p1, p2;
  always #5 clk = ~clk;
  sv_dummy_gen #(.NUM_PREGS(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .sel_i(sel), .rnd_i(rnd),
    .real_issue_i(real_iss), .fire_i(fire), .due_o(due), .instr_o(instr), .rs1_p_o(p1), .rs2_p_o(p2));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) rnd <= $urandom();
  initial begin
    int ops [4];
    rnd = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); real_iss = 1;
      check(!due, "nothing due while disabled");
    end
    real_iss = 0;
    foreach (ops[i]) ops[i] = 0;
    for (int s = 0; s < 3; s++) begin
      int lim, since, maxgap, mingap;
      sel = 2'(s); lim = (s == 0) ? 4 : (s == 1) ? 8 : 16;
      en = 1; since = 0; maxgap = 0; mingap = 99;
      @(negedge clk); fire = due; @(posedge clk); #1 fire = 0;   // resynchronise
      for (int n = 0; n < 3000; n++) begin
        @(negedge clk);
        if (due) begin
          check(instr[6:0] == 7'b0110011 && instr[11:7] == 0, "dummy is an OP instruction writing x0");
          check(int'(p1) < NP && int'(p2) < NP, "operands in range");
          case ({instr[31:25], instr[14:12]})
            {7'h00, 3'b000}: ops[0]++;
            {7'h00, 3'b111}: ops[1]++;
            {7'h01, 3'b000}: ops[2]++;
            {7'h01, 3'b001}: ops[3]++;
            default: check(0, $sformatf("unexpected dummy operation %h", instr));
          endcase
          if (since > maxgap) maxgap = since;
          if (since < mingap) mingap = since;
          fire = 1; real_iss = 0; since = 0;
        end else begin
          fire = 0; real_iss = 1; since++;
        end
        @(posedge clk); #1 fire = 0; real_iss = 0;
      end
      $display("interval 0..%0d: gaps %0d..%0d", lim, mingap, maxgap);
      check(maxgap <= lim, $sformatf("gap at most %0d (max seen %0d)", lim, maxgap));
      check(maxgap > mingap, "gap varies");
    end
    check(ops[0] > 0 && ops[1] > 0 && ops[2] > 0 && ops[3] > 0, "ADD, AND, MUL and MULH all used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
