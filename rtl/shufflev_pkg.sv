// shufflev_pkg: types and constants shared by the ShuffleV core.
//
// Holds the RV32 opcode constants, the classification that the pre-decoder
// attaches to every fetched instruction (register usage, memory access,
// control flow, serialization), and the address and bit layout of the
// ShuffleV control CSR. The CSR address and its bit layout are this design's
// own choice; the shuffle enable bit itself follows the paper, which only says
// that a configuration bit in the CSRs turns the protection on and off.
package shufflev_pkg;

  localparam int XLEN = 32;

  // RV32 major opcodes (instr[6:0])
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_FENCE  = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;

  // Control-flow class of an instruction
  typedef enum logic [1:0] {
    CF_NONE   = 2'd0,
    CF_BRANCH = 2'd1,
    CF_JAL    = 2'd2,
    CF_JALR   = 2'd3
  } cf_e;

  // Memory-access class of an instruction
  typedef enum logic [1:0] {
    MEM_NONE  = 2'd0,
    MEM_LOAD  = 2'd1,
    MEM_STORE = 2'd2
  } mem_e;

  // What the dependency tracker needs to know about one instruction.
  typedef struct packed {
    logic        uses_rs1;
    logic        uses_rs2;
    logic        writes_rd;   // rd != x0 and the instruction writes rd
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    cf_e         cf;
    mem_e        mem;
    logic [11:0] mem_off;     // load/store immediate offset
    logic [1:0]  mem_size;    // 0: byte, 1: half-word, 2: word
    logic        serial;      // FENCE, FENCE.I, ECALL, EBREAK, CSR*: never reordered
  } predec_t;

  // ShuffleV control CSR (custom machine-mode read/write CSR)
  localparam logic [11:0] CSR_SVCTRL = 12'h7C1;
  // bit 0      : shuffle enable (1 = random selection, 0 = in-order issue)
  // bit 1      : dummy instruction insertion enable
  // bits 3:2   : dummy interval select, 0 -> 0..4, 1 -> 0..8, 2/3 -> 0..16
  localparam int SVCTRL_SHUFFLE_BIT = 0;
  localparam int SVCTRL_DUMMY_BIT   = 1;
  localparam int SVCTRL_MEMOPT_BIT  = 4;

  // Dummy instruction interval for a 2-bit select value
  function automatic logic [4:0] dummy_interval(input logic [1:0] sel);
    case (sel)
      2'd0:    return 5'd4;
      2'd1:    return 5'd8;
      default: return 5'd16;
    endcase
  endfunction

endpackage
