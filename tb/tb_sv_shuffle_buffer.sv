// tb_sv_shuffle_buffer: random insert/issue traffic against a model of the
// buffer: stored fields, valid and ready bits, clearing of dependency bits
// when an entry issues (a dependent entry is ready the next cycle), refill of
// the issued slot in the same cycle, the oldest-entry vector and the
// referenced-register vector.
`timescale 1ns/1ps
module tb_sv_shuffle_buffer;
  import shufflev_pkg::*;
  localparam int N = 4, NP = 48, PW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins = 0, iss = 0;
  logic [1:0] ins_slot = 0, iss_slot = 0;
  logic [31:0] ipc = 0, iins = 0;
  predec_t ipd = '0;
  logic [PW-1:0] ird = 0, ir1 = 0, ir2 = 0;
  logic [N-1:0] idep = 0;
  logic [N-1:0] valid, ready, oldest;
  logic [31:0] pc [N]; logic [31:0] ins_w [N]; predec_t pd [N];
  logic [PW-1:0] rd [N]; logic [PW-1:0] r1 [N]; logic [PW-1:0] r2 [N];
  logic [NP-1:0] refv;
  sv_shuffle_buffer #(.N(N), .NUM_PREGS(NP)) dut (.clk_i(clk), .rst_ni(rst_n),
    .ins_i(ins), .ins_slot_i(ins_slot), .ins_pc_i(ipc), .ins_instr_i(iins), .ins_pd_i(ipd),
    .ins_rd_p_i(ird), .ins_rs1_p_i(ir1), .ins_rs2_p_i(ir2), .ins_dep_i(idep),
    .iss_i(iss), .iss_slot_i(iss_slot),
    .valid_o(valid), .ready_o(ready), .oldest_o(oldest), .pc_o(pc), .instr_o(ins_w), .pd_o(pd),
    .rd_p_o(rd), .rs1_p_o(r1), .rs2_p_o(r2), .ref_o(refv));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // model
  bit mv [N]; bit md [N][N]; int mage [N]; int stamp = 0;
  logic [31:0] mpc [N]; predec_t mpd [N]; logic [PW-1:0] mrd [N]; logic [PW-1:0] m1 [N]; logic [PW-1:0] m2 [N];
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (mv[i]) begin mv[i] = 0; foreach (md[i][j]) md[i][j] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(valid == 0, "empty after reset");
    for (int n = 0; n < 5000; n++) begin
      int free_s [$]; int rdy_s [$];
      free_s.delete(); rdy_s.delete();
      @(negedge clk);
      // check outputs against model
      begin
        int old_i; int best;
        logic [NP-1:0] eref;
        eref = '0; old_i = -1; best = 1 << 30;
        for (int i = 0; i < N; i++) begin
          bit r;
          r = mv[i];
          for (int j = 0; j < N; j++) if (md[i][j]) r = 0;
          check(valid[i] == mv[i], "valid");
          check(ready[i] == r, $sformatf("ready entry %0d", i));
          if (mv[i]) begin
            check(pc[i] == mpc[i] && pd[i] == mpd[i] && rd[i] == mrd[i] && r1[i] == m1[i] && r2[i] == m2[i], "stored fields");
            if (mpd[i].writes_rd) eref[mrd[i]] = 1;
            if (mpd[i].uses_rs1) eref[m1[i]] = 1;
            if (mpd[i].uses_rs2) eref[m2[i]] = 1;
            if (mage[i] < best) begin best = mage[i]; old_i = i; end
          end
          if (r) rdy_s.push_back(i);
        end
        check(refv == eref, "referenced registers");
        if (old_i >= 0) check(oldest == 4'(1 << old_i), $sformatf("oldest %b expected %0d", oldest, old_i));
        else check(oldest == 0, "no oldest when empty");
      end
      iss = 0; ins = 0;
      if (rdy_s.size() > 0 && $urandom_range(2) != 0) begin
        iss = 1; iss_slot = 2'(rdy_s[$urandom_range(rdy_s.size() - 1)]);
      end
      for (int i = 0; i < N; i++) if (!mv[i] || (iss && iss_slot == 2'(i))) free_s.push_back(i);
      if (free_s.size() > 0 && $urandom_range(3) != 0) begin
        ins = 1; ins_slot = 2'(free_s[$urandom_range(free_s.size() - 1)]);
        ipc = $urandom(); iins = $urandom(); ipd = predec_t'({$urandom(), $urandom()});
        ird = 6'($urandom_range(NP - 1)); ir1 = 6'($urandom_range(NP - 1)); ir2 = 6'($urandom_range(NP - 1));
        idep = 4'($urandom());
      end
      @(posedge clk);
      // model update
      if (iss) begin
        mv[iss_slot] = 0;
        for (int i = 0; i < N; i++) md[i][iss_slot] = 0;
      end
      if (ins) begin
        for (int j = 0; j < N; j++) md[ins_slot][j] = idep[j] && mv[j] && (j != ins_slot);
        mv[ins_slot] = 1; mage[ins_slot] = stamp++;
        mpc[ins_slot] = ipc; mpd[ins_slot] = ipd; mrd[ins_slot] = ird; m1[ins_slot] = ir1; m2[ins_slot] = ir2;
      end
      #1 ins = 0; iss = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
