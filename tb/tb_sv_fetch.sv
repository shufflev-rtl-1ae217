// tb_sv_fetch: sequential fetch, halting behind a branch/JALR until the
// redirect, and the JAL-at-fetch option (second instance with OPT_JAL = 1).
`timescale 1ns/1ps
module tb_sv_fetch;
  import shufflev_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc [2];
  cf_e  cf [2];
  logic [31:0] off [2];
  logic red [2];
  logic [31:0] rpc [2];
  logic [31:0] pc [2];
  logic en [2], pend [2];
  sv_fetch #(.BOOT_ADDR(32'h100)) d0 (.clk_i(clk), .rst_ni(rst_n), .pc_o(pc[0]), .fetch_en_o(en[0]), .cf_pending_o(pend[0]),
    .accept_i(acc[0]), .cf_i(cf[0]), .jal_off_i(off[0]), .redirect_i(red[0]), .redirect_pc_i(rpc[0]));
  sv_fetch #(.BOOT_ADDR(32'h100), .OPT_JAL(1'b1)) d1 (.clk_i(clk), .rst_ni(rst_n), .pc_o(pc[1]), .fetch_en_o(en[1]), .cf_pending_o(pend[1]),
    .accept_i(acc[1]), .cf_i(cf[1]), .jal_off_i(off[1]), .redirect_i(red[1]), .redirect_pc_i(rpc[1]));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic step(int u, logic a, cf_e c, logic [31:0] o, logic r, logic [31:0] rp);
    @(negedge clk);
    acc[u] = a && en[u]; cf[u] = c; off[u] = o; red[u] = r; rpc[u] = rp;
    @(posedge clk); #1;
    acc[u] = 0; red[u] = 0;
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int u = 0; u < 2; u++) begin acc[u] = 0; cf[u] = CF_NONE; off[u] = 0; red[u] = 0; rpc[u] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(pc[0] == 32'h100 && en[0], "boot address");
    for (int u = 0; u < 2; u++) begin
      step(u, 1, CF_NONE, 0, 0, 0);
      step(u, 1, CF_NONE, 0, 0, 0);
      check(pc[u] == 32'h108, "two sequential fetches");
      step(u, 0, CF_NONE, 0, 0, 0);
      check(pc[u] == 32'h108, "no accept, no advance");
      step(u, 1, CF_BRANCH, 0, 0, 0);
      check(!en[u] && pend[u], "branch halts fetch");
      step(u, 1, CF_NONE, 0, 0, 0);
      check(pc[u] == 32'h10C && !en[u], "still halted");
      step(u, 0, CF_NONE, 0, 1, 32'h200);
      check(en[u] && !pend[u] && pc[u] == 32'h200, "redirect resumes fetch at target");
      step(u, 1, CF_JAL, 32'h40, 0, 0);
      if (u == 0) begin
        check(!en[u] && pc[u] == 32'h204, "JAL halts fetch without option J");
        step(u, 0, CF_NONE, 0, 1, 32'h240);
        check(en[u] && pc[u] == 32'h240, "JAL redirect");
      end else begin
        check(en[u] && pc[u] == 32'h240, "option J: JAL followed at fetch");
      end
      step(u, 1, CF_JALR, 0, 0, 0);
      check(!en[u], "JALR halts fetch");
      step(u, 0, CF_NONE, 0, 1, 32'h300);
      check(en[u] && pc[u] == 32'h300, "JALR redirect");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
