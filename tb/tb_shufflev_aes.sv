// tb_shufflev_aes: AES-128 encryption running on the ShuffleV core.
//
// AES-128 is one of the two victim workloads the shuffling defence is meant
// to protect. This testbench writes an AES-128 encryption routine in RV32I
// (byte-wise SubBytes+ShiftRows through an S-box table, MixColumns with a
// shift-and-reduce xtime subroutine, word-wise AddRoundKey) and runs it on the
// core at its default parameters (4-entry buffer, option F, no overrides).
// The S-box is computed here from its definition (multiplicative inverse in
// GF(2^8) modulo x^8+x^4+x^3+x+1 followed by the affine map
// b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63); the 11 round keys
// are expanded here and placed in memory, so the core runs the cipher rounds
// only.
//
// Each key/plaintext pair is encrypted in three modes selected by the first
// instruction of the program, a write to the control register:
//   in-order  : shuffling off (issue order must equal program order)
//   SV-F(4)   : shuffling on, two different RNG seeds
//   SV-F(4,16): shuffling on and dummy instructions every 0..16 instructions
// Checks: the ciphertext equals the FIPS-197 appendix C.1 answer for the
// first pair and an independent AES model in this file for random pairs;
// every run leaves the same data memory as an in-order instruction-set model;
// the two seeds give different issue orders; dummies occur in the third
// mode. The cycle count of each mode is printed, giving the execution-time
// cost of shuffling and of dummies for this program.
`timescale 1ns/1ps
module tb_shufflev_aes;
  import rv_tb_pkg::*;

  localparam int MEMW = 2048;                 // 8 KiB: code at 0x0, data at 0x1000
  localparam int SBOX = 'h1000, RKEY = 'h1100, STATE = 'h1200, TMP = 'h1210, SHIFT = 'h1220;
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

  // ---------------- AES reference (byte i of a block at [8*i +: 8]) ----------------
  logic [7:0] sbox [256];

  function automatic logic [7:0] xt(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction
  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = xt(a);
    end
    return p;
  endfunction
  function automatic logic [7:0] rotl8(logic [7:0] b, int n);
    return (b << n) | (b >> (8 - n));
  endfunction

  function automatic void make_sbox();
    for (int a = 0; a < 256; a++) begin
      logic [7:0] inv, b;
      inv = 0;
      for (int c = 1; c < 256; c++) if (gmul(8'(a), 8'(c)) == 8'h01) inv = 8'(c);
      b = inv;
      sbox[a] = b ^ rotl8(b, 1) ^ rotl8(b, 2) ^ rotl8(b, 3) ^ rotl8(b, 4) ^ 8'h63;
    end
  endfunction

  function automatic logic [1407:0] expand_key(logic [127:0] key);
    logic [1407:0] rk;
    logic [7:0] t [4];
    logic [7:0] rcon, tmp;
    rk = '0;
    rk[127:0] = key;
    rcon = 8'h01;
    for (int i = 4; i < 44; i++) begin
      for (int j = 0; j < 4; j++) t[j] = rk[8*(4*(i-1)+j) +: 8];
      if (i % 4 == 0) begin
        tmp = t[0];
        t[0] = sbox[t[1]] ^ rcon; t[1] = sbox[t[2]]; t[2] = sbox[t[3]]; t[3] = sbox[tmp];
        rcon = xt(rcon);
      end
      for (int j = 0; j < 4; j++) rk[8*(4*i+j) +: 8] = rk[8*(4*(i-4)+j) +: 8] ^ t[j];
    end
    return rk;
  endfunction

  function automatic logic [127:0] aes_model(logic [127:0] pt, logic [1407:0] rk);
    logic [127:0] s, u;
    s = pt ^ rk[127:0];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) begin
        int row, col;
        row = i % 4; col = i / 4;
        u[8*i +: 8] = sbox[s[8*(row + 4*((col + row) % 4)) +: 8]];
      end
      if (r != 10) begin
        for (int c = 0; c < 4; c++) begin
          logic [7:0] a0, a1, a2, a3;
          a0 = u[8*(4*c)   +: 8]; a1 = u[8*(4*c+1) +: 8];
          a2 = u[8*(4*c+2) +: 8]; a3 = u[8*(4*c+3) +: 8];
          s[8*(4*c)   +: 8] = gmul(a0, 2) ^ gmul(a1, 3) ^ a2 ^ a3;
          s[8*(4*c+1) +: 8] = a0 ^ gmul(a1, 2) ^ gmul(a2, 3) ^ a3;
          s[8*(4*c+2) +: 8] = a0 ^ a1 ^ gmul(a2, 2) ^ gmul(a3, 3);
          s[8*(4*c+3) +: 8] = gmul(a0, 3) ^ a1 ^ a2 ^ gmul(a3, 2);
        end
      end else begin
        s = u;
      end
      s ^= rk[128*r +: 128];
    end
    return s;
  endfunction

  // byte string written as in FIPS-197 (first byte leftmost) -> block layout
  function automatic logic [127:0] bytes_le(logic [127:0] v);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = v[8*(15-i) +: 8];
    return o;
  endfunction

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

  function automatic logic [31:0] LBU(int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SB(int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] XOR(int rd, int a, int b); return enc_r(7'h00, b, a, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] ANDI(int rd, int a, int imm); return enc_i(imm, a, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(int rd, int a, int sh); return enc_i(sh, a, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRLI(int rd, int a, int sh); return enc_i(sh, a, 3'b101, rd, 7'b0010011); endfunction

  // registers: x8 S-box, x9 round key pointer, x18 state, x19 temp, x20 shift
  // table, x21 round, x5 loop index, x28 loop bound, x1 link.
  function automatic void build(int ctrl);
    prog.delete(); lab.delete();
    fx_idx.delete(); fx_f3.delete(); fx_a.delete(); fx_b.delete(); fx_lab.delete();
    emit(CSRRWI(0, SVCTRL, ctrl));
    emit(LUI(8, 1));
    emit(ADDI(9, 8, RKEY - SBOX));
    emit(ADDI(18, 8, STATE - SBOX));
    emit(ADDI(19, 8, TMP - SBOX));
    emit(ADDI(20, 8, SHIFT - SBOX));
    jal_to(1, "ark");
    emit(ADDI(21, 0, 1));
    label("round");
    // SubBytes and ShiftRows: tmp[i] = sbox[state[shift[i]]]
    emit(ADDI(5, 0, 0));
    label("sb");
    emit(ADD(6, 20, 5));  emit(LBU(6, 6, 0));
    emit(ADD(6, 18, 6));  emit(LBU(6, 6, 0));
    emit(ADD(6, 8, 6));   emit(LBU(6, 6, 0));
    emit(ADD(7, 19, 5));  emit(SB(6, 7, 0));
    emit(ADDI(5, 5, 1));
    emit(ADDI(28, 0, 16));
    br(3'b100, 5, 28, "sb");                       // blt
    emit(ADDI(28, 0, 10));
    br(3'b000, 21, 28, "last");                    // beq: no MixColumns in round 10
    // MixColumns: out_k = a_k ^ t ^ xtime(a_k ^ a_k+1), t = a0^a1^a2^a3
    emit(ADDI(5, 0, 0));
    label("mc");
    emit(ADD(6, 19, 5));
    emit(LBU(10, 6, 0)); emit(LBU(11, 6, 1)); emit(LBU(12, 6, 2)); emit(LBU(13, 6, 3));
    emit(XOR(14, 10, 11)); emit(XOR(14, 14, 12)); emit(XOR(14, 14, 13));
    emit(ADD(7, 18, 5));
    for (int k = 0; k < 4; k++) begin
      emit(XOR(15, 10 + k, 10 + (k + 1) % 4));
      jal_to(1, "xtime");
      emit(XOR(15, 15, 14)); emit(XOR(15, 15, 10 + k));
      emit(SB(15, 7, k));
    end
    emit(ADDI(5, 5, 4));
    emit(ADDI(28, 0, 16));
    br(3'b100, 5, 28, "mc");
    jal_to(0, "addkey");
    label("last");
    for (int k = 0; k < 4; k++) begin
      emit(LW(10, 19, 4 * k)); emit(SW(10, 18, 4 * k));
    end
    label("addkey");
    emit(ADDI(9, 9, 16));
    jal_to(1, "ark");
    emit(ADDI(21, 21, 1));
    emit(ADDI(28, 0, 11));
    br(3'b100, 21, 28, "round");
    emit(FENCE());
    label("halt");
    emit(HALT());
    // x15 = xtime(x15), uses x16
    label("xtime");
    emit(SRLI(16, 15, 7)); emit(SUB(16, 0, 16)); emit(ANDI(16, 16, 'h1b));
    emit(SLLI(15, 15, 1)); emit(ANDI(15, 15, 'hff)); emit(XOR(15, 15, 16));
    emit(JALR(0, 1, 0));
    // state ^= round key at x9
    label("ark");
    for (int k = 0; k < 4; k++) begin
      emit(LW(10, 18, 4 * k)); emit(LW(11, 9, 4 * k)); emit(XOR(10, 10, 11)); emit(SW(10, 18, 4 * k));
    end
    emit(JALR(0, 1, 0));
    resolve();
  endfunction

  // ---------------- one run ----------------
  function automatic void put8(int a, logic [7:0] v); mem[a >> 2][8*(a & 3) +: 8] = v; endfunction
  function automatic logic [7:0] get8(int a); return mem[a >> 2][8*(a & 3) +: 8]; endfunction

  int n_ooo = 0, n_dummy = 0, n_inorder_runs = 0;

  task automatic run(logic [127:0] pt, logic [1407:0] rk, logic [42:0] sl, logic [36:0] sc, bit inorder,
                     output logic [127:0] ct, output int ncyc, ref logic [31:0] order [$], output int ndummy);
    RvIss iss;
    bit halted, same;
    int k;
    logic [31:0] halt_pc;
    halt_pc = 32'(4 * lab["halt"]);
    foreach (mem[i]) mem[i] = '0;
    foreach (prog[i]) mem[i] = prog[i];
    for (int i = 0; i < 256; i++) put8(SBOX + i, sbox[i]);
    for (int i = 0; i < 176; i++) put8(RKEY + i, rk[8*i +: 8]);
    for (int i = 0; i < 16; i++) put8(STATE + i, pt[8*i +: 8]);
    for (int i = 0; i < 16; i++) put8(SHIFT + i, 8'((i % 4) + 4 * (((i / 4) + (i % 4)) % 4)));
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
    for (int i = 0; i < 16; i++) ct[8*i +: 8] = get8(STATE + i);
    same = 1;
    for (int a = 'h1000; a < 'h1240; a++) if (get8(a) != iss.rd8(32'(a))) same = 0;
    check(same, "data memory equals the in-order reference model");
  endtask

  // ---------------- main ----------------
  initial begin
    logic [127:0] key, pt, ct, exp_ct;
    logic [1407:0] rk;
    logic [31:0] ord_a [$];
    logic [31:0] ord_b [$];
    logic [31:0] ord_x [$];
    int cyc_in, cyc_a, cyc_b, cyc_d, nd, diff;
    longint sum_in, sum_sh, sum_d;
    sum_in = 0; sum_sh = 0; sum_d = 0;
    make_sbox();
    check(sbox[8'h00] == 8'h63 && sbox[8'h53] == 8'hed && sbox[8'hff] == 8'h16, "S-box spot values");
    for (int v = 0; v < 3; v++) begin
      if (v == 0) begin
        key = bytes_le(128'h000102030405060708090a0b0c0d0e0f);
        pt  = bytes_le(128'h00112233445566778899aabbccddeeff);
      end else begin
        key = {$urandom, $urandom, $urandom, $urandom};
        pt  = {$urandom, $urandom, $urandom, $urandom};
      end
      rk = expand_key(key);
      exp_ct = aes_model(pt, rk);
      if (v == 0)
        check(exp_ct == bytes_le(128'h69c4e0d86a7b0430d8cdb78070b4c55a), "model gives the FIPS-197 C.1 ciphertext");
      // in-order
      build('b10000);
      run(pt, rk, 43'h1234567, 37'h7654321, 1, ct, cyc_in, ord_x, nd);
      check(ct == exp_ct, $sformatf("vector %0d in-order: ciphertext %h", v, ct));
      // SV-F(4), two seeds
      build('b11001);
      run(pt, rk, 43'h1234567 + 43'(v), 37'h7654321, 0, ct, cyc_a, ord_a, nd);
      check(ct == exp_ct, $sformatf("vector %0d shuffled (seed A): ciphertext %h", v, ct));
      run(pt, rk, 43'h0abcdef + 43'(v), 37'h1112223, 0, ct, cyc_b, ord_b, nd);
      check(ct == exp_ct, $sformatf("vector %0d shuffled (seed B): ciphertext %h", v, ct));
      diff = 0;
      for (int i = 0; i < ord_a.size() && i < ord_b.size(); i++) if (ord_a[i] != ord_b[i]) diff++;
      check(diff > 0, $sformatf("vector %0d: seeds give different orders (%0d positions differ)", v, diff));
      // SV-F(4,16)
      build('b11011);
      run(pt, rk, 43'h5555 + 43'(v), 37'h3333, 0, ct, cyc_d, ord_x, nd);
      check(ct == exp_ct, $sformatf("vector %0d shuffled with dummies: ciphertext %h", v, ct));
      check(nd > 0, $sformatf("vector %0d: dummies inserted (%0d)", v, nd));
      n_dummy += nd;
      $display("vector %0d: cycles in-order=%0d shuffled=%0d/%0d shuffled+dummies=%0d (%0d dummies), %0d of %0d positions differ between seeds",
               v, cyc_in, cyc_a, cyc_b, cyc_d, nd, diff, ord_a.size());
      sum_in += cyc_in; sum_sh += (cyc_a + cyc_b) / 2; sum_d += cyc_d;
    end
    $display("AES-128: shuffling costs %0.1f%% extra cycles, with dummies (0..16) %0.1f%%, against in-order issue on this core",
             100.0 * (real'(sum_sh) / real'(sum_in) - 1.0), 100.0 * (real'(sum_d) / real'(sum_in) - 1.0));
    check(n_ooo > 0, "out-of-order issue happened");
    check(n_dummy > 0, "dummy instructions happened");
    check(n_inorder_runs > 0, "in-order mode used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
