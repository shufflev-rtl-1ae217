// sv_execute: decode/execute stage working on renamed registers.
//
// The paper keeps the base core's decode/execute stage and changes its
// decoder and data paths to use the physical register indices that come with
// each instruction from the shuffle buffer, instead of the register fields of
// the machine code. The base stage itself is not described, so this block is
// the simplest stage that does the job: a single-cycle RV32I execute unit with
// the M-extension multiply and divide instructions (the dummy instructions use
// MUL and MULH), a load/store unit for a memory with combinational read, and
// access to the ShuffleV CSR. Traps, interrupts and misaligned accesses are
// not modelled; ECALL, EBREAK, FENCE and FENCE.I execute as no-ops (their
// ordering is enforced by the dependency tracker).
//
// Timing: the instruction issued by the selector executes in the same cycle.
// The result is written to physical register rd_p_i on the next clock edge;
// rd_p_i = 0 discards it (writes to x0 and dummy instructions). For a branch
// or jump, redirect_o carries the next fetch address in the same cycle.
module sv_execute
  import shufflev_pkg::*;
#(
  parameter int unsigned PW = 6
) (
  input  logic          valid_i,
  input  logic [31:0]   pc_i,
  input  logic [31:0]   instr_i,
  input  logic [PW-1:0] rd_p_i,
  input  logic [31:0]   rs1_val_i,
  input  logic [31:0]   rs2_val_i,
  // register write-back
  output logic          rf_we_o,
  output logic [PW-1:0] rf_waddr_o,
  output logic [31:0]   rf_wdata_o,
  // control flow
  output logic          redirect_o,
  output logic [31:0]   redirect_pc_o,
  output logic          branch_taken_o,
  // data memory
  output logic          dmem_req_o,
  output logic          dmem_we_o,
  output logic [31:0]   dmem_addr_o,   // word aligned
  output logic [3:0]    dmem_be_o,
  output logic [31:0]   dmem_wdata_o,
  input  logic [31:0]   dmem_rdata_i,
  // CSR
  output logic [11:0]   csr_addr_o,
  output logic          csr_we_o,
  output logic [31:0]   csr_wdata_o,
  input  logic [31:0]   csr_rdata_i
);

  logic [6:0]  opc;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  assign opc   = instr_i[6:0];
  assign f3    = instr_i[14:12];
  assign f7    = instr_i[31:25];
  assign imm_i = {{20{instr_i[31]}}, instr_i[31:20]};
  assign imm_s = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
  assign imm_b = {{19{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
  assign imm_u = {instr_i[31:12], 12'd0};
  assign imm_j = {{11{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};

  // ALU for OP / OP-IMM
  function automatic logic [31:0] alu(input logic [2:0] fn, input logic alt,
                                      input logic [31:0] a, input logic [31:0] b);
    unique case (fn)
      3'b000: return alt ? a - b : a + b;
      3'b001: return a << b[4:0];
      3'b010: return {31'd0, $signed(a) < $signed(b)};
      3'b011: return {31'd0, a < b};
      3'b100: return a ^ b;
      3'b101: return alt ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
      3'b110: return a | b;
      default: return a & b;
    endcase
  endfunction

  // M extension
  function automatic logic [31:0] muldiv(input logic [2:0] fn, input logic [31:0] a, input logic [31:0] b);
    logic signed [63:0] p_ss, p_su;
    logic        [63:0] p_uu;
    logic signed [31:0] q_s, r_s;
    p_ss = 64'($signed(a)) * 64'($signed(b));
    p_su = 64'($signed(a)) * $signed({32'd0, b});
    p_uu = {32'd0, a} * {32'd0, b};
    q_s  = $signed(a) / $signed(b);   // kept apart so the division stays signed
    r_s  = $signed(a) % $signed(b);
    unique case (fn)
      3'b000: return p_ss[31:0];                                       // MUL
      3'b001: return p_ss[63:32];                                      // MULH
      3'b010: return p_su[63:32];                                      // MULHSU
      3'b011: return p_uu[63:32];                                      // MULHU
      3'b100: return (b == 0) ? 32'hFFFF_FFFF :                        // DIV
                     (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? a :
                     q_s;
      3'b101: return (b == 0) ? 32'hFFFF_FFFF : a / b;                 // DIVU
      3'b110: return (b == 0) ? a :                                    // REM
                     (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? 32'd0 :
                     r_s;
      default: return (b == 0) ? a : a % b;                            // REMU
    endcase
  endfunction

  logic        take;
  logic [31:0] addr;
  logic [31:0] ld_shifted;
  logic [31:0] csr_src;

  always_comb begin
    unique case (f3)
      3'b000:  take = rs1_val_i == rs2_val_i;
      3'b001:  take = rs1_val_i != rs2_val_i;
      3'b100:  take = $signed(rs1_val_i) <  $signed(rs2_val_i);
      3'b101:  take = $signed(rs1_val_i) >= $signed(rs2_val_i);
      3'b110:  take = rs1_val_i <  rs2_val_i;
      3'b111:  take = rs1_val_i >= rs2_val_i;
      default: take = 1'b0;
    endcase
  end

  assign addr       = rs1_val_i + ((opc == OPC_STORE) ? imm_s : imm_i);
  assign ld_shifted = dmem_rdata_i >> {addr[1:0], 3'b000};
  assign csr_src    = f3[2] ? {27'd0, instr_i[19:15]} : rs1_val_i;

  always_comb begin
    rf_we_o        = 1'b0;
    rf_waddr_o     = rd_p_i;
    rf_wdata_o     = '0;
    redirect_o     = 1'b0;
    redirect_pc_o  = pc_i + 32'd4;
    branch_taken_o = 1'b0;
    dmem_req_o     = 1'b0;
    dmem_we_o      = 1'b0;
    dmem_addr_o    = {addr[31:2], 2'b00};
    dmem_be_o      = '0;
    dmem_wdata_o   = rs2_val_i << {addr[1:0], 3'b000};
    csr_addr_o     = instr_i[31:20];
    csr_we_o       = 1'b0;
    csr_wdata_o    = '0;
    if (valid_i) begin
      unique case (opc)
        OPC_LUI:   begin rf_we_o = 1'b1; rf_wdata_o = imm_u; end
        OPC_AUIPC: begin rf_we_o = 1'b1; rf_wdata_o = pc_i + imm_u; end
        OPC_JAL: begin
          rf_we_o       = 1'b1;
          rf_wdata_o    = pc_i + 32'd4;
          redirect_o    = 1'b1;
          redirect_pc_o = pc_i + imm_j;
        end
        OPC_JALR: begin
          rf_we_o       = 1'b1;
          rf_wdata_o    = pc_i + 32'd4;
          redirect_o    = 1'b1;
          redirect_pc_o = (rs1_val_i + imm_i) & ~32'd1;
        end
        OPC_BRANCH: begin
          redirect_o     = 1'b1;
          branch_taken_o = take;
          redirect_pc_o  = take ? pc_i + imm_b : pc_i + 32'd4;
        end
        OPC_LOAD: begin
          dmem_req_o = 1'b1;
          rf_we_o    = 1'b1;
          unique case (f3)
            3'b000:  rf_wdata_o = {{24{ld_shifted[7]}},  ld_shifted[7:0]};
            3'b001:  rf_wdata_o = {{16{ld_shifted[15]}}, ld_shifted[15:0]};
            3'b100:  rf_wdata_o = {24'd0, ld_shifted[7:0]};
            3'b101:  rf_wdata_o = {16'd0, ld_shifted[15:0]};
            default: rf_wdata_o = dmem_rdata_i;
          endcase
        end
        OPC_STORE: begin
          dmem_req_o = 1'b1;
          dmem_we_o  = 1'b1;
          unique case (f3[1:0])
            2'b00:   dmem_be_o = 4'b0001 << addr[1:0];
            2'b01:   dmem_be_o = 4'b0011 << addr[1:0];
            default: dmem_be_o = 4'b1111;
          endcase
        end
        OPC_OPIMM: begin
          rf_we_o    = 1'b1;
          rf_wdata_o = alu(f3, (f3 == 3'b101) && instr_i[30], rs1_val_i, imm_i);
        end
        OPC_OP: begin
          rf_we_o    = 1'b1;
          rf_wdata_o = (f7 == 7'b0000001) ? muldiv(f3, rs1_val_i, rs2_val_i)
                                          : alu(f3, instr_i[30], rs1_val_i, rs2_val_i);
        end
        OPC_SYSTEM: begin
          if (f3 != 3'b000) begin
            rf_we_o    = 1'b1;
            rf_wdata_o = csr_rdata_i;
            unique case (f3[1:0])
              2'b01:   begin csr_we_o = 1'b1;              csr_wdata_o = csr_src; end
              2'b10:   begin csr_we_o = csr_src != 32'd0; csr_wdata_o = csr_rdata_i | csr_src; end
              default: begin csr_we_o = csr_src != 32'd0; csr_wdata_o = csr_rdata_i & ~csr_src; end
            endcase
          end
        end
        default: ;
      endcase
    end
  end

endmodule
