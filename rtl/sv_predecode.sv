// sv_predecode: instruction classifier in front of the shuffle buffer.
//
// Before an instruction enters the shuffle buffer the dependency tracker must
// know which logical registers it reads and writes, whether it is a load or a
// store (and with which offset and access size), whether it changes control
// flow, and whether it is one of the instructions that must never be moved:
// FENCE, FENCE.I, ECALL, EBREAK and the CSR instructions. The paper states
// these classes and what each is used for (Sec. III-A); the field extraction
// follows the RV32 base encoding. Register x0 is never reported as written,
// so writes to x0 are not renamed. Unknown opcodes are treated as serializing,
// which is this design's own conservative choice.
//
// Purely combinational: instr_i -> pd_o in the same cycle.
module sv_predecode
  import shufflev_pkg::*;
(
  input  logic [31:0] instr_i,
  output predec_t     pd_o
);

  logic [6:0] opc;
  logic [2:0] f3;
  assign opc = instr_i[6:0];
  assign f3  = instr_i[14:12];

  always_comb begin
    pd_o           = '0;
    pd_o.rs1       = instr_i[19:15];
    pd_o.rs2       = instr_i[24:20];
    pd_o.rd        = instr_i[11:7];
    pd_o.cf        = CF_NONE;
    pd_o.mem       = MEM_NONE;
    pd_o.mem_size  = f3[1:0];
    unique case (opc)
      OPC_LUI, OPC_AUIPC: pd_o.writes_rd = 1'b1;
      OPC_JAL: begin
        pd_o.writes_rd = 1'b1;
        pd_o.cf        = CF_JAL;
      end
      OPC_JALR: begin
        pd_o.writes_rd = 1'b1;
        pd_o.uses_rs1  = 1'b1;
        pd_o.cf        = CF_JALR;
      end
      OPC_BRANCH: begin
        pd_o.uses_rs1 = 1'b1;
        pd_o.uses_rs2 = 1'b1;
        pd_o.cf       = CF_BRANCH;
      end
      OPC_LOAD: begin
        pd_o.uses_rs1  = 1'b1;
        pd_o.writes_rd = 1'b1;
        pd_o.mem       = MEM_LOAD;
        pd_o.mem_off   = instr_i[31:20];
      end
      OPC_STORE: begin
        pd_o.uses_rs1 = 1'b1;
        pd_o.uses_rs2 = 1'b1;
        pd_o.mem      = MEM_STORE;
        pd_o.mem_off  = {instr_i[31:25], instr_i[11:7]};
      end
      OPC_OPIMM: begin
        pd_o.uses_rs1  = 1'b1;
        pd_o.writes_rd = 1'b1;
      end
      OPC_OP: begin
        pd_o.uses_rs1  = 1'b1;
        pd_o.uses_rs2  = 1'b1;
        pd_o.writes_rd = 1'b1;
      end
      OPC_FENCE: pd_o.serial = 1'b1;
      OPC_SYSTEM: begin
        pd_o.serial = 1'b1;
        if (f3 != 3'b000) begin          // CSR instructions
          pd_o.writes_rd = 1'b1;
          pd_o.uses_rs1  = ~f3[2];       // register form reads rs1
        end
      end
      default: pd_o.serial = 1'b1;
    endcase
    if (pd_o.rd == 5'd0) pd_o.writes_rd = 1'b0;
    if (!pd_o.uses_rs1) pd_o.rs1 = 5'd0;
    if (!pd_o.uses_rs2) pd_o.rs2 = 5'd0;
  end

endmodule
