// tb_shufflev_mac: the 5-input 5-weight multiply-accumulate workload on the
// ShuffleV core.
//
// The 5i5w MAC (sum of in_i * w_i for i = 1..5) is the building block of
// fully connected and convolution layers and the second victim workload the
// shuffling defence is meant to protect. This testbench runs it as a small
// fully connected layer: 16 neurons, each a 5i5w MAC over the same 5 inputs
// with its own 5 weights, written as a loop with the MAC unrolled the way a
// compiler emits it (load, load, MUL, ADD per term). The core runs at its
// default parameters (4-entry buffer, option F, no overrides).
//
// As in the AES testbench, each data set runs in three modes chosen by the
// program's first instruction: shuffling off (in program order), shuffling on
// with two RNG seeds, and shuffling with dummy instructions every 0..16
// instructions. Checks: the 16 outputs equal the products computed here; the
// data memory equals an in-order instruction-set model; the two seeds give
// different issue orders; in-order mode keeps program order; dummies occur.
// The cycle counts of the three modes are printed.
`timescale 1ns/1ps
module tb_shufflev_mac;
  import rv_tb_pkg::*;

  localparam int MEMW = 2048;                 // 8 KiB: code at 0x0, data at 0x1000
  localparam int IN = 'h1000, WGT = 'h1100, OUT = 'h1400, NEUR = 16;
  localparam int SVCTRL = 'h7C1;

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

  shufflev_core dut (
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

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program with labels ----------------
  logic [31:0] prog [$];
  int          lab [string];
  int          fx_idx [$];
  int          fx_f3  [$];      // branch funct3, or -1 for JAL
  int          fx_a   [$];
  int          fx_b   [$];
  string       fx_lab [$];

  function automatic void emit(logic [31:0] i); prog.push_back(i); endfunction
  function automatic void label(string l); lab[l] = prog.size(); endfunction
  function automatic void br(int f3, int a, int b, string l);
    fx_idx.push_back(prog.size()); fx_f3.push_back(f3); fx_a.push_back(a); fx_b.push_back(b);
    fx_lab.push_back(l); prog.push_back(32'h0);
  endfunction
  function automatic void jal_to(int rd, string l); br(-1, rd, 0, l); endfunction
  function automatic void resolve();
    foreach (fx_idx[k]) begin
      int off;
      off = 4 * (lab[fx_lab[k]] - fx_idx[k]);
      prog[fx_idx[k]] = (fx_f3[k] < 0) ? JAL(fx_a[k], off) : enc_b(off, fx_b[k], fx_a[k], 3'(fx_f3[k]));
    end
  endfunction

  logic [31:0] inp [5];
  logic [31:0] wgt [5 * NEUR];
  logic [31:0] exp_out [NEUR];

  // registers: x8 inputs, x9 weight pointer, x18 output pointer, x21 neuron,
  // x22 neuron count, x10 accumulator, x11..x13 temporaries.
  function automatic void build(int ctrl);
    prog.delete(); lab.delete();
    fx_idx.delete(); fx_f3.delete(); fx_a.delete(); fx_b.delete(); fx_lab.delete();
    emit(CSRRWI(0, SVCTRL, ctrl));
    emit(LUI(8, 1));
    emit(ADDI(9, 8, WGT - IN));
    emit(ADDI(18, 8, OUT - IN));
    emit(ADDI(21, 0, 0));
    emit(ADDI(22, 0, NEUR));
    label("neuron");
    emit(ADDI(10, 0, 0));
    for (int i = 0; i < 5; i++) begin
      emit(LW(11, 8, 4 * i)); emit(LW(12, 9, 4 * i)); emit(MUL(13, 11, 12)); emit(ADD(10, 10, 13));
    end
    emit(SW(10, 18, 0));
    emit(ADDI(9, 9, 20));
    emit(ADDI(18, 18, 4));
    emit(ADDI(21, 21, 1));
    br(3'b100, 21, 22, "neuron");
    emit(FENCE());
    label("halt");
    emit(HALT());
    resolve();
  endfunction

  // ---------------- one run ----------------
  function automatic void put8(int a, logic [7:0] v); mem[a >> 2][8*(a & 3) +: 8] = v; endfunction
  function automatic logic [7:0] get8(int a); return mem[a >> 2][8*(a & 3) +: 8]; endfunction

  int n_ooo = 0, n_dummy = 0, n_inorder_runs = 0;

  task automatic run(logic [42:0] sl, logic [36:0] sc, bit inorder,
                     output bit out_ok, output int ncyc, ref logic [31:0] order [$], output int ndummy);
    RvIss iss;
    bit halted, same;
    int k;
    logic [31:0] halt_pc;
    halt_pc = 32'(4 * lab["halt"]);
    foreach (mem[i]) mem[i] = '0;
    foreach (prog[i]) mem[i] = prog[i];
    for (int i = 0; i < 5; i++) mem[(IN >> 2) + i] = inp[i];
    for (int i = 0; i < 5 * NEUR; i++) mem[(WGT >> 2) + i] = wgt[i];
    iss = new();
    for (int i = 0; i < MEMW; i++) iss.wr32(32'(4 * i), mem[i]);
    check(iss.run(200000) == 1, "reference model halts");
    order.delete();
    rst_n = 0; seed_we = 0; seed_lfsr = sl; seed_casr = sc;
    repeat (3) @(posedge clk);
    #1 rst_n = 1; seed_we = 1;
    @(posedge clk); #1 seed_we = 0;
    halted = 0; ncyc = 0; k = 0; same = 1; ndummy = 0;
    while (!halted && ncyc < 200000) begin
      @(negedge clk);
      ncyc++;
      if (issue_valid && issue_dummy) ndummy++;
      if (issue_valid && !issue_dummy) begin
        if (issue_pc == halt_pc) halted = 1;
        else begin
          if (!(k < iss.trace.size() && issue_pc == iss.trace[k])) begin
            same = 0;
            n_ooo++;
          end
          order.push_back(issue_pc);
          k++;
        end
      end
    end
    check(halted, "core reaches the end of the program");
    check(k == iss.trace.size(), $sformatf("issued %0d instructions, reference %0d", k, iss.trace.size()));
    if (inorder) begin
      check(same, "shuffling off: issue order equals program order");
      n_inorder_runs++;
    end
    out_ok = 1;
    for (int j = 0; j < NEUR; j++) if (mem[(OUT >> 2) + j] != exp_out[j]) out_ok = 0;
    same = 1;
    for (int a = 'h1000; a < 'h1500; a++) if (get8(a) != iss.rd8(32'(a))) same = 0;
    check(same, "data memory equals the in-order reference model");
  endtask

  // ---------------- main ----------------
  initial begin
    logic [31:0] ord_a [$];
    logic [31:0] ord_b [$];
    logic [31:0] ord_x [$];
    int cyc_in, cyc_a, cyc_b, cyc_d, nd, diff;
    longint sum_in, sum_sh, sum_d;
    bit ok;
    sum_in = 0; sum_sh = 0; sum_d = 0;
    for (int v = 0; v < 4; v++) begin
      for (int i = 0; i < 5; i++) inp[i] = (v == 0) ? 32'(i + 1) : 32'($urandom_range(0, 255));
      for (int i = 0; i < 5 * NEUR; i++) wgt[i] = (v == 0) ? 32'(i + 1) : 32'($urandom_range(0, 255)) - 32'd128;
      for (int j = 0; j < NEUR; j++) begin
        exp_out[j] = 0;
        for (int i = 0; i < 5; i++) exp_out[j] += inp[i] * wgt[5 * j + i];
      end
      if (v == 0) check(exp_out[0] == 55, "first neuron of the fixed set: 1*1+2*2+3*3+4*4+5*5 = 55");
      build('b10000);
      run(43'h1234567, 37'h7654321, 1, ok, cyc_in, ord_x, nd);
      check(ok, $sformatf("set %0d in-order: outputs", v));
      build('b11001);
      run(43'h1234567 + 43'(v), 37'h7654321, 0, ok, cyc_a, ord_a, nd);
      check(ok, $sformatf("set %0d shuffled (seed A): outputs", v));
      run(43'h0abcdef + 43'(v), 37'h1112223, 0, ok, cyc_b, ord_b, nd);
      check(ok, $sformatf("set %0d shuffled (seed B): outputs", v));
      diff = 0;
      for (int i = 0; i < ord_a.size() && i < ord_b.size(); i++) if (ord_a[i] != ord_b[i]) diff++;
      check(diff > 0, $sformatf("set %0d: seeds give different orders (%0d positions differ)", v, diff));
      build('b11011);
      run(43'h5555 + 43'(v), 37'h3333, 0, ok, cyc_d, ord_x, nd);
      check(ok, $sformatf("set %0d shuffled with dummies: outputs", v));
      check(nd > 0, $sformatf("set %0d: dummies inserted (%0d)", v, nd));
      n_dummy += nd;
      $display("set %0d: cycles in-order=%0d shuffled=%0d/%0d shuffled+dummies=%0d (%0d dummies), %0d of %0d positions differ between seeds",
               v, cyc_in, cyc_a, cyc_b, cyc_d, nd, diff, ord_a.size());
      sum_in += cyc_in; sum_sh += (cyc_a + cyc_b) / 2; sum_d += cyc_d;
    end
    $display("5i5w MAC layer: shuffling costs %0.1f%% extra cycles, with dummies (0..16) %0.1f%%, against in-order issue on this core",
             100.0 * (real'(sum_sh) / real'(sum_in) - 1.0), 100.0 * (real'(sum_d) / real'(sum_in) - 1.0));
    check(n_ooo > 0, "out-of-order issue happened");
    check(n_dummy > 0, "dummy instructions happened");
    check(n_inorder_runs > 0, "in-order mode used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
