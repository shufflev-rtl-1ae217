// tb_sv_inst_selector: the 5-entry D-Box printed in the paper's selection
// figure is used as the reference table: for every random start index and
// every ready pattern the selected entry must be the first ready one in that
// column's order (e.g. start 2 with entries 1 and 3 ready selects 3). A
// 4-entry instance (the default size) is checked against the rule "r, r+1,
// r-1, r+2, ..." written out independently, plus the branch-first override
// and in-order issue when shuffling is off.
`timescale 1ns/1ps
module tb_sv_inst_selector;
  // 5-entry instance
  logic [4:0] rdy5, cf5, old5;
  logic [15:0] rnd5;
  logic v5; logic [2:0] idx5, st5;
  sv_inst_selector #(.N(5), .SHORTCUT_CF(1'b0)) s5 (.ready_i(rdy5), .cf_i(cf5), .oldest_i(old5), .shuffle_en_i(1'b1),
    .rnd_i(rnd5), .sel_valid_o(v5), .sel_idx_o(idx5), .start_idx_o(st5));
  // 4-entry instance (default parameters)
  logic [3:0] rdy4, cf4, old4;
  logic [15:0] rnd4;
  logic en4, v4; logic [1:0] idx4, st4;
  sv_inst_selector s4 (.ready_i(rdy4), .cf_i(cf4), .oldest_i(old4), .shuffle_en_i(en4),
    .rnd_i(rnd4), .sel_valid_o(v4), .sel_idx_o(idx4), .start_idx_o(st4));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // D-Box as printed (row k, column r)
  int dbox5 [5][5] = '{'{0, 1, 2, 3, 4},
                       '{1, 2, 3, 4, 0},
                       '{4, 0, 1, 2, 3},
                       '{2, 3, 4, 0, 1},
                       '{3, 4, 0, 1, 2}};
  initial begin
    cf5 = '0; old5 = '0;
    // the worked example of the figure
    rnd5 = 2; rdy5 = 5'b01010; #1;
    check(v5 && idx5 == 3, $sformatf("figure example selects entry 3 (got %0d)", idx5));
    for (int r = 0; r < 5; r++) begin
      for (int p = 0; p < 32; p++) begin
        int exp_idx;
        exp_idx = -1;
        for (int k = 0; k < 5; k++) if (exp_idx < 0 && p[dbox5[k][r]]) exp_idx = dbox5[k][r];
        rnd5 = 16'(r + 5 * $urandom_range(100)); rdy5 = 5'(p); #1;
        check(st5 == 3'(r), "start index = rnd mod N");
        check(v5 == (p != 0), "valid when something is ready");
        if (p != 0) check(idx5 == 3'(exp_idx), $sformatf("r=%0d ready=%b: got %0d expected %0d", r, p, idx5, exp_idx));
      end
    end
    // 4 entries: closest ready entry, then branch-first, then in-order
    en4 = 1; old4 = 4'b0001;
    for (int n = 0; n < 2000; n++) begin
      int r, exp_idx, first_cf;
      rdy4 = 4'($urandom()); cf4 = 4'($urandom()) & 4'($urandom()); rnd4 = 16'($urandom());
      r = int'(rnd4) % 4;
      exp_idx = -1;
      for (int d = 0; d < 4 && exp_idx < 0; d++) begin
        int cand;
        if (d == 0) cand = r;
        else if (d % 2 == 1) cand = (r + (d + 1) / 2) % 4;
        else cand = (r - d / 2 + 4) % 4;
        if (rdy4[cand]) exp_idx = cand;
      end
      first_cf = -1;
      for (int i = 0; i < 4; i++) if (first_cf < 0 && rdy4[i] && cf4[i]) first_cf = i;
      if (first_cf >= 0) exp_idx = first_cf;
      #1;
      if (rdy4 != 0) check(v4 && idx4 == 2'(exp_idx), $sformatf("N=4 r=%0d ready=%b cf=%b: %0d vs %0d", r, rdy4, cf4, idx4, exp_idx));
    end
    en4 = 0;
    for (int i = 0; i < 4; i++) begin
      old4 = 4'(1 << i); rdy4 = 4'b1111; cf4 = 4'b1111; #1;
      check(v4 && idx4 == 2'(i), "shuffle off: oldest entry");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
