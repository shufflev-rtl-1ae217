// rv_tb_pkg: testbench helpers for the ShuffleV core.
//
// - Encoders for the RV32 instruction formats, so testbenches can build
//   programs in SystemVerilog.
// - RvIss: a small in-order instruction-set model of RV32IM (plus CSR reads
//   and writes of a plain register). It is the reference the core is checked
//   against: the shuffled execution must leave exactly the same memory image
//   as strictly sequential execution. It stops on a self-loop "jal x0, 0".
package rv_tb_pkg;

  function automatic logic [31:0] enc_r(input logic [6:0] f7, input int rs2, input int rs1,
                                        input logic [2:0] f3, input int rd, input logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_i(input int imm, input int rs1, input logic [2:0] f3,
                                        input int rd, input logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_s(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    logic [12:0] i;
    i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(input int imm20, input int rd, input logic [6:0] opc);
    return {20'(imm20), 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_j(input int imm, input int rd);
    logic [20:0] i;
    i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  // common instructions
  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD (int rd, int rs1, int rs2); return enc_r(7'h00, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (int rd, int rs1, int rs2); return enc_r(7'h20, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] MUL (int rd, int rs1, int rs2); return enc_r(7'h01, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] LW  (int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW  (int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 3'b010); endfunction
  function automatic logic [31:0] BNE (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] BLT (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'b100); endfunction
  function automatic logic [31:0] JAL (int rd, int off);           return enc_j(off, rd); endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return enc_i(imm, rs1, 3'b000, rd, 7'b1100111); endfunction
  function automatic logic [31:0] LUI (int rd, int imm20);         return enc_u(imm20, rd, 7'b0110111); endfunction
  function automatic logic [31:0] FENCE();                         return 32'h0ff0000f; endfunction
  function automatic logic [31:0] CSRRW(int rd, int csr, int rs1); return enc_i(csr, rs1, 3'b001, rd, 7'b1110011); endfunction
  function automatic logic [31:0] CSRRWI(int rd, int csr, int uimm); return enc_i(csr, uimm, 3'b101, rd, 7'b1110011); endfunction
  function automatic logic [31:0] HALT();                          return enc_j(0, 0); endfunction

  // In-order reference model. Memory is a byte-addressed associative array.
  class RvIss;
    logic [31:0] x [32];
    logic [7:0]  mem [int unsigned];
    logic [31:0] csr [int unsigned];
    logic [31:0] pc;
    int          steps;
    logic [31:0] trace [$];   // PCs in execution order
    logic [31:0] wval  [$];   // value written to rd by each traced instruction (0 if none)

    function new();
      foreach (x[i]) x[i] = '0;
      pc = '0;
      steps = 0;
    endfunction

    function logic [7:0] rd8(logic [31:0] a);
      return mem.exists(a) ? mem[a] : 8'h00;
    endfunction
    function logic [31:0] rd32(logic [31:0] a);
      return {rd8(a + 3), rd8(a + 2), rd8(a + 1), rd8(a)};
    endfunction
    function void wr32(logic [31:0] a, logic [31:0] d);
      for (int b = 0; b < 4; b++) mem[a + b] = d[8*b +: 8];
    endfunction

    // run until the self-loop or max_steps; returns 1 if it halted
    function bit run(int max_steps);
      while (steps < max_steps) begin
        logic [31:0] ins, a, b, res, nxt, ea;
        logic [6:0] opc; logic [2:0] f3; logic [6:0] f7; int rd;
        logic signed [31:0] ii, is, ib, ij;
        logic signed [63:0] prod;
        logic [63:0] uprod;
        bit wr;
        ins = rd32(pc);
        if (ins == HALT()) return 1'b1;
        trace.push_back(pc);
        steps++;
        opc = ins[6:0]; f3 = ins[14:12]; f7 = ins[31:25]; rd = int'(ins[11:7]);
        a = x[ins[19:15]]; b = x[ins[24:20]];
        ii = {{20{ins[31]}}, ins[31:20]};
        is = {{20{ins[31]}}, ins[31:25], ins[11:7]};
        ib = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
        ij = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
        nxt = pc + 4; wr = 1'b0; res = '0;
        case (opc)
          7'b0110111: begin wr = 1; res = {ins[31:12], 12'd0}; end
          7'b0010111: begin wr = 1; res = pc + {ins[31:12], 12'd0}; end
          7'b1101111: begin wr = 1; res = pc + 4; nxt = pc + ij; end
          7'b1100111: begin wr = 1; res = pc + 4; nxt = (a + ii) & 32'hFFFF_FFFE; end
          7'b1100011: begin
            bit t;
            case (f3)
              3'b000: t = (a == b);
              3'b001: t = (a != b);
              3'b100: t = ($signed(a) < $signed(b));
              3'b101: t = ($signed(a) >= $signed(b));
              3'b110: t = (a < b);
              default: t = (a >= b);
            endcase
            if (t) nxt = pc + ib;
          end
          7'b0000011: begin
            logic [31:0] w;
            ea = a + ii; wr = 1;
            w = {rd8(ea + 3), rd8(ea + 2), rd8(ea + 1), rd8(ea)};
            case (f3)
              3'b000: res = {{24{w[7]}}, w[7:0]};
              3'b001: res = {{16{w[15]}}, w[15:0]};
              3'b100: res = {24'd0, w[7:0]};
              3'b101: res = {16'd0, w[15:0]};
              default: res = w;
            endcase
          end
          7'b0100011: begin
            ea = a + is;
            mem[ea] = b[7:0];
            if (f3 != 3'b000) mem[ea + 1] = b[15:8];
            if (f3 == 3'b010) begin mem[ea + 2] = b[23:16]; mem[ea + 3] = b[31:24]; end
          end
          7'b0010011, 7'b0110011: begin
            logic [31:0] op2;
            op2 = (opc == 7'b0010011) ? ii : b;
            wr = 1;
            if (opc == 7'b0110011 && f7 == 7'h01) begin
              prod  = $signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b});
              uprod = {32'd0, a} * {32'd0, b};
              case (f3)
                3'b000: res = prod[31:0];
                3'b001: res = prod[63:32];
                3'b010: begin logic signed [64:0] p; p = $signed({a[31], a}) * $signed({1'b0, b}); res = p[63:32]; end
                3'b011: res = uprod[63:32];
                3'b100: begin
                  logic signed [31:0] q;
                  q = $signed(a) / $signed(b);
                  if (b == 0) res = '1; else if (a == 32'h80000000 && b == '1) res = a; else res = q;
                end
                3'b101: res = (b == 0) ? '1 : a / b;
                3'b110: begin
                  logic signed [31:0] r;
                  r = $signed(a) % $signed(b);
                  if (b == 0) res = a; else if (a == 32'h80000000 && b == '1) res = '0; else res = r;
                end
                default: res = (b == 0) ? a : a % b;
              endcase
            end else begin
              case (f3)
                3'b000: res = (opc == 7'b0110011 && ins[30]) ? a - op2 : a + op2;
                3'b001: res = a << op2[4:0];
                3'b010: res = ($signed(a) < $signed(op2)) ? 1 : 0;
                3'b011: res = (a < op2) ? 1 : 0;
                3'b100: res = a ^ op2;
                3'b101: begin
                  logic signed [31:0] sa;
                  sa = $signed(a) >>> op2[4:0];
                  res = ins[30] ? sa : a >> op2[4:0];
                end
                3'b110: res = a | op2;
                default: res = a & op2;
              endcase
            end
          end
          7'b1110011: begin
            if (f3 != 0) begin
              logic [31:0] old, src;
              int unsigned ad;
              ad = int'(ins[31:20]);
              old = csr.exists(ad) ? csr[ad] : 32'd0;
              src = f3[2] ? {27'd0, ins[19:15]} : a;
              wr = 1; res = old;
              case (f3[1:0])
                2'b01: csr[ad] = src;
                2'b10: csr[ad] = old | src;
                default: csr[ad] = old & ~src;
              endcase
            end
          end
          default: ;
        endcase
        if (wr && rd != 0) x[rd] = res;
        wval.push_back((wr && rd != 0) ? res : 32'd0);
        pc = nxt;
      end
      return 1'b0;
    endfunction
  endclass

endpackage
