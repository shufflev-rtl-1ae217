// tb_sv_execute: random RV32IM instructions (ALU, shifts, compares, multiply
// and divide with corner cases, LUI/AUIPC, branches, JAL/JALR, byte/half/word
// loads and stores, CSR read/write) executed one at a time by the execute
// stage and by the in-order reference model; write-back value, next PC, store
// data and byte enables must agree. Physical register numbers are passed
// through unchanged to the write port.
`timescale 1ns/1ps
module tb_sv_execute;
  import rv_tb_pkg::*;
  localparam int PW = 6;
  logic valid; logic [31:0] pc, instr, v1, v2;
  logic [PW-1:0] rdp;
  logic we; logic [PW-1:0] wa; logic [31:0] wd;
  logic redir, taken; logic [31:0] rpc;
  logic mreq, mwe; logic [31:0] maddr, mwd, mrd; logic [3:0] mbe;
  logic [11:0] caddr; logic cwe; logic [31:0] cwd, crd;
  sv_execute #(.PW(PW)) dut (.valid_i(valid), .pc_i(pc), .instr_i(instr), .rd_p_i(rdp),
    .rs1_val_i(v1), .rs2_val_i(v2), .rf_we_o(we), .rf_waddr_o(wa), .rf_wdata_o(wd),
    .redirect_o(redir), .redirect_pc_o(rpc), .branch_taken_o(taken),
    .dmem_req_o(mreq), .dmem_we_o(mwe), .dmem_addr_o(maddr), .dmem_be_o(mbe), .dmem_wdata_o(mwd), .dmem_rdata_i(mrd),
    .csr_addr_o(caddr), .csr_we_o(cwe), .csr_wdata_o(cwd), .csr_rdata_i(crd));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s (instr %h v1 %h v2 %h)", what, instr, v1, v2); end
  endtask
  logic [31:0] memword;
  assign mrd = memword;

  function automatic logic [31:0] pick_val();
    case ($urandom_range(5))
      0: return 32'h8000_0000;
      1: return 32'hFFFF_FFFF;
      2: return 32'd0;
      3: return 32'($urandom_range(40));
      default: return $urandom();
    endcase
  endfunction

  function automatic logic [31:0] rand_instr();
    logic [2:0] f3;
    f3 = 3'($urandom_range(7));
    case ($urandom_range(11))
      0: return enc_r(7'h00, 2, 1, f3, 3, 7'b0110011);
      1: return enc_r(7'h20, 2, 1, ($urandom_range(1) ? 3'b000 : 3'b101), 3, 7'b0110011);
      2: return enc_r(7'h01, 2, 1, f3, 3, 7'b0110011);
      3: return (f3 == 3'b001) ? enc_i($urandom_range(31), 1, f3, 3, 7'b0010011)
              : (f3 == 3'b101) ? enc_i($urandom_range(31) | ($urandom_range(1) << 10), 1, f3, 3, 7'b0010011)
              : enc_i($urandom_range(4095), 1, f3, 3, 7'b0010011);
      4: return LUI(3, $urandom());
      5: return enc_u($urandom(), 3, 7'b0010111);
      6: return enc_b(2 * ($urandom_range(4095) - 2048), 2, 1, ((f3 == 3'b010 || f3 == 3'b011) ? 3'b000 : f3));
      7: return JAL(3, 2 * ($urandom_range(65535) - 32768));
      8: return JALR(3, 1, $urandom_range(4095));
      9: return enc_i($urandom_range(63), 1, (f3[1:0] == 2'b11) ? 3'b010 : (f3 == 3'b110 ? 3'b100 : f3), 3, 7'b0000011);
      10: return enc_s($urandom_range(63), 2, 1, 3'($urandom_range(2)));
      default: return CSRRW(3, 'h7C1, 1);
    endcase
  endfunction

  initial begin
    valid = 0; pc = 0; instr = 0; v1 = 0; v2 = 0; rdp = 0; crd = 0; memword = 0;
    #1 check(!we && !redir && !mreq && !cwe, "idle when not valid");
    for (int n = 0; n < 20000; n++) begin
      RvIss m;
      logic [31:0] a;
      m = new();
      instr = rand_instr();
      pc = {$urandom_range(1023), 2'b00} + 32'h8000;
      v1 = pick_val(); v2 = pick_val();
      if (instr[6:0] == 7'b0000011 || instr[6:0] == 7'b0100011) begin
        v1 = 32'h1000 + $urandom_range(255);
        // keep accesses naturally aligned
        a = v1 + ((instr[6:0] == 7'b0100011) ? {{20{instr[31]}}, instr[31:25], instr[11:7]} : {{20{instr[31]}}, instr[31:20]});
        if (instr[13:12] == 2'b10) v1 = v1 - {30'd0, a[1:0]};
        if (instr[13:12] == 2'b01) v1 = v1 - {31'd0, a[0]};
      end
      rdp = PW'($urandom_range(47));
      memword = $urandom();
      crd = $urandom();
      m.x[1] = v1; m.x[2] = v2; m.pc = pc;
      m.wr32(pc, instr);
      // memory word as seen by the reference
      a = v1 + ((instr[6:0] == 7'b0100011) ? {{20{instr[31]}}, instr[31:25], instr[11:7]} : {{20{instr[31]}}, instr[31:20]});
      m.wr32({a[31:2], 2'b00}, memword);
      m.csr['h7C1] = crd;
      valid = 1;
      void'(m.run(1));
      #1;
      check(m.steps == 1, "reference stepped");
      if (m.wval[0] != 0 || instr[11:7] == 0 || (instr[6:0] inside {7'b0110111, 7'b0010111, 7'b1101111, 7'b1100111, 7'b0000011, 7'b0010011, 7'b0110011, 7'b1110011})) begin
        if (instr[6:0] inside {7'b0110111, 7'b0010111, 7'b1101111, 7'b1100111, 7'b0000011, 7'b0010011, 7'b0110011, 7'b1110011}) begin
          check(we && wa == rdp, "write enable and physical destination");
          check(wd == m.x[3], $sformatf("result %h expected %h", wd, m.x[3]));
        end else begin
          check(!we, "no register write");
        end
      end
      if (instr[6:0] inside {7'b1100011, 7'b1101111, 7'b1100111}) check(redir && rpc == m.pc, $sformatf("next pc %h expected %h", rpc, m.pc));
      else check(!redir, "no redirect");
      if (instr[6:0] == 7'b0100011) begin
        logic [31:0] merged;
        merged = memword;
        for (int b = 0; b < 4; b++) if (mbe[b]) merged[8*b +: 8] = mwd[8*b +: 8];
        check(mreq && mwe && maddr == {a[31:2], 2'b00}, "store request");
        check(merged == m.rd32({a[31:2], 2'b00}), $sformatf("stored word %h expected %h", merged, m.rd32({a[31:2], 2'b00})));
      end
      if (instr[6:0] == 7'b1110011) check(cwe && cwd == v1 && caddr == 12'h7C1, "CSR write");
      valid = 0; #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
