// shufflev_core: RV32IM core with random instruction shuffling (ShuffleV-F).
//
// Top of the design. Instructions are fetched one per cycle into an N-entry
// shuffle buffer after register renaming and dependency tracking. Each cycle
// the instruction selector picks one ready entry at random (closest ready
// entry to a random index, branch/jump first) and the execute stage runs it,
// so the same program executes in a different order on every run while
// keeping its result. A dummy instruction generator can additionally slip
// random ADD/AND/MUL/MULH instructions into the execute stage.
//
// Issue policy (paper Sec. III-C): an instruction is issued only when the
// buffer is full, except while fetch is halted behind a pending branch or
// jump, when the buffer drains. After the control-flow instruction executes
// the core stalls until the buffer is full again. Two extra cases of this
// design also allow issue from a partly filled buffer: shuffling switched off
// in the CSR (then the oldest entry issues, in program order), and no free
// physical register for the fetched instruction (only with fewer physical
// registers than the default).
//
// Parameters keep the paper's evaluated configuration: N = 4 entries,
// option F on (SHORTCUT_CF), options M (OPT_MEM) and J (OPT_JAL) off.
// NUM_PREGS is this design's choice. The instruction and data memories are
// outside the core and read combinationally (this design's simplification
// of the base core's request/grant bus); the data port is word-addressed with
// byte enables.
module shufflev_core
  import shufflev_pkg::*;
#(
  parameter int unsigned N           = 4,
  parameter int unsigned NUM_PREGS   = 48,
  parameter bit          SHORTCUT_CF = 1'b1,
  parameter bit          OPT_MEM     = 1'b0,
  parameter bit          OPT_JAL     = 1'b0,
  parameter bit          DUMMY_RESET = 1'b0,
  parameter logic [31:0] BOOT_ADDR   = 32'h0000_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // instruction memory (combinational read)
  output logic [31:0] imem_addr_o,
  input  logic [31:0] imem_rdata_i,
  // data memory (combinational read, write on clock edge)
  output logic        dmem_req_o,
  output logic        dmem_we_o,
  output logic [31:0] dmem_addr_o,
  output logic [3:0]  dmem_be_o,
  output logic [31:0] dmem_wdata_o,
  input  logic [31:0] dmem_rdata_i,
  // random generator seeding
  input  logic        seed_we_i,
  input  logic [42:0] seed_lfsr_i,
  input  logic [36:0] seed_casr_i,
  // observation of the issue stream
  output logic        issue_valid_o,
  output logic        issue_dummy_o,
  output logic [31:0] issue_pc_o,
  output logic [31:0] issue_instr_o
);

  localparam int unsigned PW = $clog2(NUM_PREGS);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  // ---------------- random numbers ----------------
  logic [31:0] rnd;
  sv_rng u_rng (
    .clk_i, .rst_ni, .en_i(1'b1),
    .seed_we_i, .seed_lfsr_i, .seed_casr_i,
    .rnd_o(rnd)
  );

  // ---------------- CSR ----------------
  logic        shuffle_en, dummy_en, mem_opt_en;
  logic [1:0]  dummy_sel;
  logic [11:0] csr_addr;
  logic        csr_we;
  logic [31:0] csr_wdata, csr_rdata;
  sv_csr #(.DUMMY_RESET(DUMMY_RESET)) u_csr (
    .clk_i, .rst_ni,
    .addr_i(csr_addr), .we_i(csr_we), .wdata_i(csr_wdata), .rdata_o(csr_rdata),
    .shuffle_en_o(shuffle_en), .dummy_en_o(dummy_en), .dummy_sel_o(dummy_sel),
    .mem_opt_en_o(mem_opt_en)
  );

  // ---------------- shuffle buffer ----------------
  logic [N-1:0]         b_valid, b_ready, b_oldest, b_cf;
  logic [31:0]          b_pc    [N];
  logic [31:0]          b_instr [N];
  predec_t              b_pd    [N];
  logic [PW-1:0]        b_rd_p  [N];
  logic [PW-1:0]        b_rs1_p [N];
  logic [PW-1:0]        b_rs2_p [N];
  logic [NUM_PREGS-1:0] b_ref;

  logic                 ins, iss;
  logic [IW-1:0]        ins_slot, iss_slot;
  logic [N-1:0]         ins_dep;

  // ---------------- fetch + pre-decode + rename ----------------
  logic        fetch_en, cf_pending, redirect;
  logic [31:0] pc, redirect_pc;
  predec_t     f_pd;
  logic [PW-1:0] f_rs1_p, f_rs2_p, f_rd_p_free;
  logic        alloc_ok;

  sv_predecode u_predecode (.instr_i(imem_rdata_i), .pd_o(f_pd));

  sv_rename #(.NUM_PREGS(NUM_PREGS)) u_rename (
    .clk_i, .rst_ni,
    .rs1_i(f_pd.rs1), .rs2_i(f_pd.rs2), .rs1_p_o(f_rs1_p), .rs2_p_o(f_rs2_p),
    .rd_i(f_pd.rd), .alloc_i(ins && f_pd.writes_rd),
    .rd_p_o(f_rd_p_free), .alloc_ok_o(alloc_ok),
    .ref_i(b_ref)
  );

  sv_fetch #(.BOOT_ADDR(BOOT_ADDR), .OPT_JAL(OPT_JAL)) u_fetch (
    .clk_i, .rst_ni,
    .pc_o(pc), .fetch_en_o(fetch_en), .cf_pending_o(cf_pending),
    .accept_i(ins), .cf_i(f_pd.cf),
    .jal_off_i({{11{imem_rdata_i[31]}}, imem_rdata_i[31], imem_rdata_i[19:12],
                imem_rdata_i[20], imem_rdata_i[30:21], 1'b0}),
    .redirect_i(redirect), .redirect_pc_i(redirect_pc)
  );
  assign imem_addr_o = pc;

  // ---------------- selection / issue ----------------
  logic          sel_valid;
  logic [IW-1:0] sel_idx, start_idx;
  logic          full, starved, can_issue, dummy_due, issue_dummy;

  always_comb for (int i = 0; i < N; i++) b_cf[i] = b_pd[i].cf != CF_NONE;

  sv_inst_selector #(.N(N), .SHORTCUT_CF(SHORTCUT_CF)) u_sel (
    .ready_i(b_ready), .cf_i(b_cf), .oldest_i(b_oldest),
    .shuffle_en_i(shuffle_en), .rnd_i(rnd[15:0]),
    .sel_valid_o(sel_valid), .sel_idx_o(sel_idx), .start_idx_o(start_idx)
  );

  assign full      = &b_valid;
  assign starved   = fetch_en && f_pd.writes_rd && !alloc_ok;
  assign can_issue = sel_valid && (full || cf_pending || starved || !shuffle_en);

  logic [31:0]   d_instr;
  logic [PW-1:0] d_rs1_p, d_rs2_p;
  sv_dummy_gen #(.NUM_PREGS(NUM_PREGS)) u_dummy (
    .clk_i, .rst_ni, .en_i(dummy_en), .sel_i(dummy_sel), .rnd_i(rnd),
    .real_issue_i(iss), .fire_i(issue_dummy),
    .due_o(dummy_due), .instr_o(d_instr), .rs1_p_o(d_rs1_p), .rs2_p_o(d_rs2_p)
  );

  assign issue_dummy = can_issue && dummy_due;
  assign iss         = can_issue && !dummy_due;
  assign iss_slot    = sel_idx;

  // ---------------- insertion ----------------
  logic [N-1:0] valid_after;
  logic         slot_free;
  assign valid_after = b_valid & ~(iss ? (N'(1) << iss_slot) : '0);

  always_comb begin
    ins_slot  = '0;
    slot_free = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!valid_after[i]) begin
        ins_slot  = IW'(i);
        slot_free = 1'b1;
      end
    end
  end

  assign ins = fetch_en && slot_free && !starved;

  sv_dep_track #(.N(N), .PW(PW), .OPT_MEM(OPT_MEM)) u_dep (
    .mem_opt_en_i(mem_opt_en), .new_pd_i(f_pd), .new_rs1_p_i(f_rs1_p), .new_rs2_p_i(f_rs2_p),
    .pend_valid_i(valid_after), .pend_pd_i(b_pd), .pend_rd_p_i(b_rd_p), .pend_rs1_p_i(b_rs1_p),
    .dep_o(ins_dep)
  );

  sv_shuffle_buffer #(.N(N), .NUM_PREGS(NUM_PREGS)) u_buf (
    .clk_i, .rst_ni,
    .ins_i(ins), .ins_slot_i(ins_slot), .ins_pc_i(pc), .ins_instr_i(imem_rdata_i),
    .ins_pd_i(f_pd), .ins_rd_p_i(f_pd.writes_rd ? f_rd_p_free : '0),
    .ins_rs1_p_i(f_rs1_p), .ins_rs2_p_i(f_rs2_p), .ins_dep_i(ins_dep),
    .iss_i(iss), .iss_slot_i(iss_slot),
    .valid_o(b_valid), .ready_o(b_ready), .oldest_o(b_oldest),
    .pc_o(b_pc), .instr_o(b_instr), .pd_o(b_pd),
    .rd_p_o(b_rd_p), .rs1_p_o(b_rs1_p), .rs2_p_o(b_rs2_p), .ref_o(b_ref)
  );

  // ---------------- execute ----------------
  logic          x_valid;
  logic [31:0]   x_pc, x_instr, x_rs1_val, x_rs2_val;
  logic [PW-1:0] x_rd_p, x_rs1_p, x_rs2_p;
  logic          rf_we;
  logic [PW-1:0] rf_waddr;
  logic [31:0]   rf_wdata;
  logic          branch_taken;
  logic          ex_redirect;

  always_comb begin
    x_valid = iss || issue_dummy;
    if (issue_dummy) begin
      x_pc    = '0;
      x_instr = d_instr;
      x_rd_p  = '0;
      x_rs1_p = d_rs1_p;
      x_rs2_p = d_rs2_p;
    end else begin
      x_pc    = b_pc[iss_slot];
      x_instr = b_instr[iss_slot];
      x_rd_p  = b_rd_p[iss_slot];
      x_rs1_p = b_rs1_p[iss_slot];
      x_rs2_p = b_rs2_p[iss_slot];
    end
  end

  sv_regfile #(.NUM_PREGS(NUM_PREGS)) u_rf (
    .clk_i, .rst_ni,
    .raddr_a_i(x_rs1_p), .rdata_a_o(x_rs1_val),
    .raddr_b_i(x_rs2_p), .rdata_b_o(x_rs2_val),
    .we_i(rf_we), .waddr_i(rf_waddr), .wdata_i(rf_wdata)
  );

  sv_execute #(.PW(PW)) u_ex (
    .valid_i(x_valid), .pc_i(x_pc), .instr_i(x_instr), .rd_p_i(x_rd_p),
    .rs1_val_i(x_rs1_val), .rs2_val_i(x_rs2_val),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_wdata_o(rf_wdata),
    .redirect_o(ex_redirect), .redirect_pc_o(redirect_pc), .branch_taken_o(branch_taken),
    .dmem_req_o, .dmem_we_o, .dmem_addr_o, .dmem_be_o, .dmem_wdata_o, .dmem_rdata_i,
    .csr_addr_o(csr_addr), .csr_we_o(csr_we), .csr_wdata_o(csr_wdata), .csr_rdata_i(csr_rdata)
  );

  assign issue_valid_o = x_valid;
  assign issue_dummy_o = issue_dummy;
  assign issue_pc_o    = x_pc;
  assign issue_instr_o = x_instr;

  // with option J the fetch unit already followed the JAL: no second redirect
  assign redirect = ex_redirect && !(OPT_JAL && x_instr[6:0] == OPC_JAL);

  logic unused;
  assign unused = ^{branch_taken, start_idx};

  initial assert (NUM_PREGS >= 33) else $fatal(1, "NUM_PREGS must be at least 33");

endmodule
