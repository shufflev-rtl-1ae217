// tb_sv_dep_track: dependency bits for directed cases (RAW through a renamed
// register, no false WAW/WAR after renaming, serializing instructions in both
// directions, the load/store rules without and with the "M" option including
// the paper's LW/SW/LW example), then random cases against a model.
`timescale 1ns/1ps
module tb_sv_dep_track;
  import shufflev_pkg::*;
  localparam int N = 4, PW = 6;
  predec_t npd;
  logic [PW-1:0] n1, n2;
  logic [N-1:0] pv;
  predec_t ppd [N];
  logic [PW-1:0] prd [N];
  logic [PW-1:0] pb [N];
  logic [N-1:0] dep0, dep1, dep2;
  sv_dep_track #(.N(N), .PW(PW), .OPT_MEM(1'b0)) d0 (.mem_opt_en_i(1'b1), .new_pd_i(npd), .new_rs1_p_i(n1), .new_rs2_p_i(n2),
      .pend_valid_i(pv), .pend_pd_i(ppd), .pend_rd_p_i(prd), .pend_rs1_p_i(pb), .dep_o(dep0));
  sv_dep_track #(.N(N), .PW(PW), .OPT_MEM(1'b1)) d1 (.mem_opt_en_i(1'b1), .new_pd_i(npd), .new_rs1_p_i(n1), .new_rs2_p_i(n2),
      .pend_valid_i(pv), .pend_pd_i(ppd), .pend_rd_p_i(prd), .pend_rs1_p_i(pb), .dep_o(dep1));
  // M option built in but switched off at run time: must behave as without M
  sv_dep_track #(.N(N), .PW(PW), .OPT_MEM(1'b1)) d2 (.mem_opt_en_i(1'b0), .new_pd_i(npd), .new_rs1_p_i(n1), .new_rs2_p_i(n2),
      .pend_valid_i(pv), .pend_pd_i(ppd), .pend_rd_p_i(prd), .pend_rs1_p_i(pb), .dep_o(dep2));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic predec_t mk(bit u1, bit u2, bit w, mem_e m, int off, int sz, bit ser);
    predec_t p;
    p = '0; p.uses_rs1 = u1; p.uses_rs2 = u2; p.writes_rd = w; p.mem = m;
    p.mem_off = 12'(off); p.mem_size = 2'(sz); p.serial = ser;
    return p;
  endfunction

  function automatic bit overlap(int oa, int sa, int ob, int sb);
    int la, lb;
    la = 1 << sa; lb = 1 << sb;
    return (oa < ob + lb) && (ob < oa + la);
  endfunction

  initial begin
    for (int j = 0; j < N; j++) begin ppd[j] = '0; prd[j] = '0; pb[j] = '0; end
    pv = '0;
    // paper example after renaming: LW X6,4(X1); SUB X7,X6,X2; AND X8,X3,X4; OR X9,X8,X5
    ppd[0] = mk(1, 0, 1, MEM_LOAD, 4, 2, 0); prd[0] = 6; pb[0] = 1;
    ppd[1] = mk(1, 1, 1, MEM_NONE, 0, 0, 0); prd[1] = 7;
    ppd[2] = mk(1, 1, 1, MEM_NONE, 0, 0, 0); prd[2] = 8;
    pv = 4'b0111;
    npd = mk(1, 1, 1, MEM_NONE, 0, 0, 0); n1 = 8; n2 = 5;     // OR X9,X8,X5
    #1 check(dep0 == 4'b0100, "OR depends only on AND");
    npd = mk(1, 1, 1, MEM_NONE, 0, 0, 0); n1 = 6; n2 = 2;     // SUB X7,X6,X2
    #1 check(dep0 == 4'b0001, "SUB depends only on LW");
    npd = mk(1, 1, 1, MEM_NONE, 0, 0, 0); n1 = 3; n2 = 4;     // AND X8,X3,X4: no WAW/WAR left
    #1 check(dep0 == 4'b0000, "AND independent after renaming");
    pv = 4'b0011;
    npd = mk(1, 1, 1, MEM_NONE, 0, 0, 0); n1 = 8; n2 = 8;
    #1 check(dep0 == 4'b0000, "invalid entry never depended on");
    // serializing
    pv = 4'b0111;
    npd = mk(0, 0, 0, MEM_NONE, 0, 0, 1); n1 = 0; n2 = 0;
    #1 check(dep0 == 4'b0111 && dep1 == 4'b0111, "serializing instruction waits for all");
    ppd[3] = mk(0, 0, 0, MEM_NONE, 0, 0, 1); pv = 4'b1000;
    npd = mk(1, 1, 1, MEM_NONE, 0, 0, 0); n1 = 20; n2 = 21;
    #1 check(dep0 == 4'b1000, "later instruction waits for serializing one");
    // memory: LW R1,4(R2) ; SW R3,0(R4) ; LW R5,4(R4)  (bases renamed to 12 and 14)
    ppd[0] = mk(1, 0, 1, MEM_LOAD, 4, 2, 0);  prd[0] = 30; pb[0] = 12;
    ppd[1] = mk(1, 1, 0, MEM_STORE, 0, 2, 0); prd[1] = 0;  pb[1] = 14;
    ppd[2] = '0; ppd[3] = '0;
    pv = 4'b0011;
    npd = mk(1, 0, 1, MEM_LOAD, 4, 2, 0); n1 = 14; n2 = 0;
    #1 check(dep0 == 4'b0011, "without M: load waits for all loads and stores");
    check(dep1 == 4'b0000, "with M: LW 4(R4) independent of SW 0(R4) and of the other load");
    pv = 4'b0001;
    npd = mk(1, 1, 0, MEM_STORE, 0, 2, 0); n1 = 14; n2 = 3;
    #1 check(dep1 == 4'b0001, "with M: store after load with a different base depends");
    ppd[0] = mk(1, 0, 1, MEM_LOAD, 2, 0, 0); pb[0] = 14;   // LB 2(base)
    #1 check(dep1 == 4'b0001, "with M: SW 0 overlaps LB 2 on the same base");
    ppd[0] = mk(1, 0, 1, MEM_LOAD, 4, 0, 0);                // LB 4(base)
    #1 check(dep1 == 4'b0000, "with M: SW 0 does not overlap LB 4");
    ppd[0] = mk(1, 0, 1, MEM_LOAD, -2, 1, 0);               // LH -2(base)
    #1 check(dep1 == 4'b0000, "with M: SW 0 does not overlap LH -2");
    ppd[0] = mk(1, 0, 1, MEM_LOAD, -1, 1, 0);               // LH -1(base)
    #1 check(dep1 == 4'b0001, "with M: SW 0 overlaps LH -1");
    // random against a model
    for (int n = 0; n < 5000; n++) begin
      logic [N-1:0] e0, e1;
      pv = 4'($urandom());
      for (int j = 0; j < N; j++) begin
        ppd[j] = mk($urandom_range(1), $urandom_range(1), $urandom_range(1), mem_e'($urandom_range(2)),
                    $urandom_range(15) - 8, $urandom_range(2), $urandom_range(7) == 0);
        prd[j] = 6'($urandom_range(7)); pb[j] = 6'($urandom_range(3));
      end
      npd = mk($urandom_range(1), $urandom_range(1), $urandom_range(1), mem_e'($urandom_range(2)),
               $urandom_range(15) - 8, $urandom_range(2), $urandom_range(7) == 0);
      n1 = 6'($urandom_range(7)); n2 = 6'($urandom_range(7));
      for (int j = 0; j < N; j++) begin
        bit raw, ser, m0, m1;
        raw = ppd[j].writes_rd && ((npd.uses_rs1 && n1 == prd[j]) || (npd.uses_rs2 && n2 == prd[j]));
        ser = npd.serial || ppd[j].serial;
        m0 = (npd.mem != MEM_NONE) && (ppd[j].mem != MEM_NONE);
        m1 = m0 && (npd.mem == MEM_STORE || ppd[j].mem == MEM_STORE) &&
             (n1 != pb[j] || overlap($signed(npd.mem_off), npd.mem_size, $signed(ppd[j].mem_off), ppd[j].mem_size));
        e0[j] = pv[j] && (raw || ser || m0);
        e1[j] = pv[j] && (raw || ser || m1);
      end
      #1;
      check(dep0 == e0, $sformatf("random case %0d without M: %b vs %b", n, dep0, e0));
      check(dep1 == e1, $sformatf("random case %0d with M: %b vs %b", n, dep1, e1));
      check(dep2 == e0, $sformatf("random case %0d with M disabled by CSR: %b vs %b", n, dep2, e0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
