// tb_shufflev_core: end-to-end test of the ShuffleV core.
//
// Builds RV32IM programs in SystemVerilog (random ALU/multiply/load/store code,
// forward branches, a call and return, a counted loop, the 5-input 5-weight
// multiply-accumulate kernel, and CSR writes that switch shuffling off, on and
// turn dummy insertion on), runs each on the core and on an in-order reference
// model, and checks that
//  * the data memory image after the run is identical,
//  * every instruction of the reference trace was issued exactly once,
//  * with shuffling off the issue order equals program order,
//  * after every branch/jump the refill stall is at most N cycles,
//  * two runs of the same program with different seeds issue in different
//    orders (the order is random) but give the same result.
// It counts how often each mechanism occurs (out-of-order issue, drain
// behind a pending branch, refill stall, branch-first pick, dummy insertion,
// in-order mode, physical-register starvation) and fails if one never occurs.
// NUM_PREGS is reduced to 34 so that physical-register starvation happens.
`timescale 1ns/1ps
module tb_shufflev_core;
  import rv_tb_pkg::*;

  localparam int unsigned N         = 4;
  localparam int unsigned NUM_PREGS = 34;
  localparam int MEMW = 2048;             // 8 KiB: code at 0x0, data at 0x1000

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_req, dmem_we;
  logic [3:0]  dmem_be;
  logic        seed_we;
  logic [42:0] seed_lfsr;
  logic [36:0] seed_casr;
  logic        issue_valid, issue_dummy;
  logic [31:0] issue_pc, issue_instr;

  logic [31:0] mem [MEMW];

  shufflev_core #(.N(N), .NUM_PREGS(NUM_PREGS)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .imem_addr_o(imem_addr), .imem_rdata_i(imem_rdata),
    .dmem_req_o(dmem_req), .dmem_we_o(dmem_we), .dmem_addr_o(dmem_addr), .dmem_be_o(dmem_be),
    .dmem_wdata_o(dmem_wdata), .dmem_rdata_i(dmem_rdata),
    .seed_we_i(seed_we), .seed_lfsr_i(seed_lfsr), .seed_casr_i(seed_casr),
    .issue_valid_o(issue_valid), .issue_dummy_o(issue_dummy),
    .issue_pc_o(issue_pc), .issue_instr_o(issue_instr)
  );

  assign imem_rdata = mem[imem_addr[12:2]];
  assign dmem_rdata = mem[dmem_addr[12:2]];
  always_ff @(posedge clk) begin
    if (rst_n && dmem_req && dmem_we) begin
      for (int b = 0; b < 4; b++)
        if (dmem_be[b]) mem[dmem_addr[12:2]][8*b +: 8] <= dmem_wdata[8*b +: 8];
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters
  int n_mem_reorder = 0;
  int n_ooo = 0, n_drain = 0, n_refill = 0, n_shortcut = 0, n_dummy = 0;
  int n_inorder = 0, n_starved = 0, n_redirect = 0;
  int cycles = 0;

  // ---------------- program construction ----------------
  logic [31:0] prog [$];
  localparam int SVCTRL = 'h7C1;

  function automatic void emit(logic [31:0] i); prog.push_back(i); endfunction

  function automatic void li(int rd, logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    emit(LUI(rd, int'(hi[31:12])));
    emit(ADDI(rd, rd, int'(v[11:0])));
  endfunction

  // one random non-control instruction on x1..x15, memory relative to x20
  function automatic void rand_op();
    int rd, a, b, k;
    rd = 1 + $urandom_range(14); a = 1 + $urandom_range(14); b = 1 + $urandom_range(14);
    k = $urandom_range(15);
    case (k)
      0: emit(ADD(rd, a, b));
      1: emit(SUB(rd, a, b));
      2: emit(enc_r(7'h00, b, a, 3'b100, rd, 7'b0110011));          // XOR
      3: emit(enc_r(7'h00, b, a, 3'b110, rd, 7'b0110011));          // OR
      4: emit(enc_r(7'h00, b, a, 3'b010, rd, 7'b0110011));          // SLT
      5: emit(MUL(rd, a, b));
      6: emit(enc_r(7'h01, b, a, 3'b001, rd, 7'b0110011));          // MULH
      7: emit(enc_r(7'h01, b, a, 3'b011, rd, 7'b0110011));          // MULHU
      8: emit(enc_r(7'h01, b, a, 3'b100, rd, 7'b0110011));          // DIV
      9: emit(ADDI(rd, a, $urandom_range(4095) - 2048));
      10: emit(enc_i($urandom_range(31) | 'h400, a, 3'b101, rd, 7'b0010011)); // SRAI
      11: emit(SW(a, 20, 4 * $urandom_range(31)));
      12: emit(LW(rd, 20, 4 * $urandom_range(31)));
      13: emit(enc_s($urandom_range(127), a, 20, 3'b000));           // SB
      14: emit(enc_i($urandom_range(127), 20, 3'b100, rd, 7'b0000011)); // LBU
      default: emit(enc_i(2 * $urandom_range(63), 20, 3'b001, rd, 7'b0000011)); // LH
    endcase
  endfunction

  function automatic void build_program(int body_len);
    int loop_top, call_site, func_at, mac_top;
    prog.delete();
    emit(LUI(20, 1));                              // x20 = 0x1000 data base
    for (int r = 1; r <= 15; r++) li(r, $urandom());
    for (int i = 0; i < body_len; i++) begin
      if ($urandom_range(9) == 0) begin            // forward branch over 1..3 ops
        int skip;
        skip = 1 + $urandom_range(2);
        emit(enc_b(4 * (skip + 1), 1 + $urandom_range(14), 1 + $urandom_range(14),
                   $urandom_range(1) ? 3'b000 : 3'b001));
        for (int s = 0; s < skip; s++) rand_op();
      end else begin
        rand_op();
      end
    end
    // shuffling off for a stretch: must issue in program order
    emit(CSRRWI(0, SVCTRL, 'b11000));               // shuffle off, dummy off
    for (int i = 0; i < 12; i++) rand_op();
    emit(CSRRWI(0, SVCTRL, 'b10001));               // shuffle back on
    // counted loop
    emit(ADDI(23, 0, 6));
    loop_top = prog.size();
    for (int i = 0; i < 5; i++) rand_op();
    emit(ADDI(23, 23, -1));
    emit(BNE(23, 0, 4 * (loop_top - prog.size())));
    // call and return (JAL / JALR)
    call_site = prog.size();
    emit(JAL(28, 4 * 3));                          // -> func
    emit(ADDI(29, 0, 7));                          // return lands here
    emit(JAL(0, 4 * 4));                           // skip over func
    func_at = prog.size();
    rand_op(); rand_op();
    emit(JALR(0, 28, 0));
    // dummy instructions on, interval 0..4, then the 5i5w MAC kernel
    emit(CSRRWI(0, SVCTRL, 'b10011));
    li(21, 32'h1100); li(22, 32'h1120); emit(ADDI(23, 0, 5)); emit(ADDI(24, 0, 0));
    mac_top = prog.size();
    emit(LW(25, 21, 0)); emit(LW(26, 22, 0)); emit(MUL(27, 25, 26)); emit(ADD(24, 24, 27));
    emit(ADDI(21, 21, 4)); emit(ADDI(22, 22, 4)); emit(ADDI(23, 23, -1));
    emit(BNE(23, 0, 4 * (mac_top - prog.size())));
    emit(SW(24, 20, 'h1F0));
    emit(CSRRWI(0, SVCTRL, 'b10001));
    // dump registers
    for (int r = 1; r <= 15; r++) emit(SW(r, 20, 'h200 + 4 * r));
    emit(SW(29, 20, 'h2F0));
    emit(FENCE());
    emit(HALT());
  endfunction

  // ---------------- one run ----------------
  logic [31:0] data_init [256];
  logic [31:0] issued [$];

  task automatic run_once(int max_cycles, logic [42:0] sl, logic [36:0] sc,
                          ref logic [31:0] final_data [256], ref logic [31:0] order [$]);
    int halt_idx, last_redirect, gap_limit_viol;
    bit halted, inorder_ok;
    logic [31:0] halt_pc;
    RvIss iss;
    int k;
    halt_pc = 32'(4 * (prog.size() - 1));
    foreach (mem[i]) mem[i] = '0;
    foreach (prog[i]) mem[i] = prog[i];
    for (int i = 0; i < 256; i++) mem[1024 + i] = data_init[i];
    // reference
    iss = new();
    foreach (prog[i]) iss.wr32(32'(4 * i), prog[i]);
    for (int i = 0; i < 256; i++) iss.wr32(32'h1000 + 32'(4 * i), data_init[i]);
    check(iss.run(100000), "reference model halts");
    order.delete();
    rst_n = 0; seed_we = 0; seed_lfsr = sl; seed_casr = sc;
    repeat (3) @(posedge clk);
    #1 rst_n = 1; seed_we = 1;
    @(posedge clk); #1 seed_we = 0;
    halted = 0; k = 0; inorder_ok = 1; last_redirect = -1; gap_limit_viol = 0;
    for (int c = 0; c < max_cycles && !halted; c++) begin
      @(negedge clk);
      cycles++;
      if (issue_valid && !issue_dummy) begin
        if (issue_pc == halt_pc) begin
          halted = 1;
        end else begin
          if (k < iss.trace.size() && issue_pc != iss.trace[k]) n_ooo++;
          if (!dut.shuffle_en) begin
            n_inorder++;
            if (!(k < iss.trace.size() && issue_pc == iss.trace[k])) inorder_ok = 0;
          end
          order.push_back(issue_pc);
          k++;
        end
        if (last_redirect >= 0) begin
          if (c - last_redirect - 1 > int'(N)) gap_limit_viol++;
          last_redirect = -1;
        end
      end
      if (issue_valid && issue_dummy) begin
        n_dummy++;
        last_redirect = -1;
      end
      if (dut.iss && !dut.full && dut.cf_pending) n_drain++;
      if (!issue_valid && dut.sel_valid && !dut.cf_pending && !dut.full) n_refill++;
      if (dut.iss && dut.b_cf[dut.iss_slot] && ($countones(dut.b_ready) > 1)) n_shortcut++;
      if (dut.starved) n_starved++;
      // without the M option no load/store may pass an older pending one
      if (dut.iss && dut.b_pd[dut.iss_slot].mem != shufflev_pkg::MEM_NONE)
        for (int j = 0; j < int'(N); j++)
          if (dut.b_valid[j] && dut.b_pd[j].mem != shufflev_pkg::MEM_NONE && dut.u_buf.age_q[dut.iss_slot][j]) n_mem_reorder++;
      if (dut.redirect) begin
        n_redirect++;
        last_redirect = c;
      end
    end
    check(halted, "core reached the halt instruction");
    check(k == iss.trace.size(), $sformatf("issued %0d instructions, reference executed %0d", k, iss.trace.size()));
    // same multiset of PCs
    begin
      int cnt [logic [31:0]];
      bit same;
      same = 1;
      foreach (iss.trace[i]) cnt[iss.trace[i]] = cnt.exists(iss.trace[i]) ? cnt[iss.trace[i]] + 1 : 1;
      foreach (order[i]) begin
        if (!cnt.exists(order[i])) same = 0;
        else cnt[order[i]]--;
      end
      foreach (cnt[p]) if (cnt[p] != 0) same = 0;
      check(same, "each instruction issued exactly as often as in the reference");
    end
    check(inorder_ok, "program order while shuffling is disabled");
    check(gap_limit_viol == 0, $sformatf("refill stall after branch/jump at most N cycles (%0d violations)", gap_limit_viol));
    for (int i = 0; i < 256; i++) begin
      final_data[i] = mem[1024 + i];
      check(mem[1024 + i] == iss.rd32(32'h1000 + 32'(4 * i)),
            $sformatf("data word 0x%0h: core %h reference %h", 32'h1000 + 4 * i, mem[1024 + i], iss.rd32(32'h1000 + 32'(4 * i))));
    end
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] res_a [256], res_b [256];
    logic [31:0] ord_a [$], ord_b [$];
    int diff;
    logic [31:0] mac_ref;
    process::self().srandom(1234);
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < 256; i++) data_init[i] = $urandom();
      build_program(60 + 20 * t);
      run_once(20000, 43'h123456789 + 43'(t), 37'h0ABCDEF + 37'(t), res_a, ord_a);
      run_once(20000, 43'h3141592653 + 43'(t), 37'h2718281 + 37'(t), res_b, ord_b);
      diff = 0;
      for (int i = 0; i < ord_a.size() && i < ord_b.size(); i++) if (ord_a[i] != ord_b[i]) diff++;
      check(diff > 0, $sformatf("program %0d: two seeds give different issue orders (%0d positions differ)", t, diff));
      check(res_a == res_b, "two seeds give the same result");
      // MAC kernel result, computed directly
      mac_ref = 0;
      for (int i = 0; i < 5; i++) mac_ref += data_init[64 + i] * data_init[72 + i];
      check(res_a[124] == mac_ref, $sformatf("5i5w MAC result %h expected %h", res_a[124], mac_ref));
      $display("program %0d: %0d instructions, %0d issue positions differ between seeds", t, ord_a.size(), diff);
    end
    $display("mechanisms: out-of-order=%0d drain=%0d refill-stall=%0d branch-first=%0d dummy=%0d in-order=%0d starved=%0d redirects=%0d cycles=%0d",
             n_ooo, n_drain, n_refill, n_shortcut, n_dummy, n_inorder, n_starved, n_redirect, cycles);
    check(n_mem_reorder == 0, $sformatf("no load/store passed an older one without the M option (%0d)", n_mem_reorder));
    check(n_ooo > 0, "out-of-order issue happened");
    check(n_drain > 0, "buffer drained behind a pending branch");
    check(n_refill > 0, "refill stall happened");
    check(n_shortcut > 0, "branch-first selection happened");
    check(n_dummy > 0, "dummy instruction inserted");
    check(n_inorder > 0, "in-order mode used");
    check(n_starved > 0, "physical register starvation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
