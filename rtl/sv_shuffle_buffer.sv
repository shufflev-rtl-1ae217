// sv_shuffle_buffer: the N-entry shuffle buffer of the ShuffleV core.
//
// Fetched instructions wait here until the instruction selector picks one of
// them, in random order, for execution. As in the paper (Sec. III, Fig. 5)
// each entry holds the PC, the instruction word, a valid bit, N dependency
// bits (bit j: this entry waits for entry j) and the physical destination and
// source register indices. An entry is ready when it is valid and all its
// dependency bits are clear. This implementation also keeps, per entry, the
// pre-decoded class of the instruction (used by the dependency tracker and by
// the branch-first selection rule) and an N-bit age vector (bit j: entry j
// was inserted earlier and is still pending); the age vector is this design's
// addition and is used only to issue in program order when shuffling is
// switched off.
//
// One entry can be inserted and one removed per cycle, and the removed slot
// may be refilled in the same cycle. Removing entry j clears bit j of every
// dependency and age vector, so a dependent entry becomes ready in the next
// cycle. ref_o marks every physical register named by a valid entry; the
// renaming unit uses it to find free registers.
module sv_shuffle_buffer
  import shufflev_pkg::*;
#(
  parameter int unsigned N         = 4,
  parameter int unsigned NUM_PREGS = 48,
  parameter int unsigned PW        = $clog2(NUM_PREGS),
  parameter int unsigned IW        = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // insertion
  input  logic                 ins_i,
  input  logic [IW-1:0]        ins_slot_i,
  input  logic [31:0]          ins_pc_i,
  input  logic [31:0]          ins_instr_i,
  input  predec_t              ins_pd_i,
  input  logic [PW-1:0]        ins_rd_p_i,
  input  logic [PW-1:0]        ins_rs1_p_i,
  input  logic [PW-1:0]        ins_rs2_p_i,
  input  logic [N-1:0]         ins_dep_i,
  // removal (issue)
  input  logic                 iss_i,
  input  logic [IW-1:0]        iss_slot_i,
  // entry contents
  output logic [N-1:0]         valid_o,
  output logic [N-1:0]         ready_o,
  output logic [N-1:0]         oldest_o,
  output logic [31:0]          pc_o    [N],
  output logic [31:0]          instr_o [N],
  output predec_t              pd_o    [N],
  output logic [PW-1:0]        rd_p_o  [N],
  output logic [PW-1:0]        rs1_p_o [N],
  output logic [PW-1:0]        rs2_p_o [N],
  output logic [NUM_PREGS-1:0] ref_o
);

  logic [N-1:0] valid_q;
  logic [N-1:0] dep_q [N];
  logic [N-1:0] age_q [N];
  logic [N-1:0] iss_mask, ins_mask;

  assign iss_mask = iss_i ? (N'(1) << iss_slot_i) : '0;
  assign ins_mask = ins_i ? (N'(1) << ins_slot_i) : '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < N; i++) begin
        dep_q[i]   <= '0;
        age_q[i]   <= '0;
        pc_o[i]    <= '0;
        instr_o[i] <= '0;
        pd_o[i]    <= '0;
        rd_p_o[i]  <= '0;
        rs1_p_o[i] <= '0;
        rs2_p_o[i] <= '0;
      end
    end else begin
      valid_q <= (valid_q & ~iss_mask) | ins_mask;
      for (int i = 0; i < N; i++) begin
        if (ins_mask[i]) begin
          pc_o[i]    <= ins_pc_i;
          instr_o[i] <= ins_instr_i;
          pd_o[i]    <= ins_pd_i;
          rd_p_o[i]  <= ins_rd_p_i;
          rs1_p_o[i] <= ins_rs1_p_i;
          rs2_p_o[i] <= ins_rs2_p_i;
          dep_q[i]   <= ins_dep_i & valid_q & ~iss_mask & ~ins_mask;
          age_q[i]   <= valid_q & ~iss_mask & ~ins_mask;
        end else begin
          dep_q[i]   <= dep_q[i] & ~iss_mask;
          age_q[i]   <= age_q[i] & ~iss_mask;
        end
      end
    end
  end

  always_comb begin
    ref_o = '0;
    for (int i = 0; i < N; i++) begin
      valid_o[i]  = valid_q[i];
      ready_o[i]  = valid_q[i] && (dep_q[i] == '0);
      oldest_o[i] = valid_q[i] && ((age_q[i] & valid_q) == '0);
      if (valid_q[i]) begin
        if (pd_o[i].writes_rd) ref_o[rd_p_o[i]]  = 1'b1;
        if (pd_o[i].uses_rs1)  ref_o[rs1_p_o[i]] = 1'b1;
        if (pd_o[i].uses_rs2)  ref_o[rs2_p_o[i]] = 1'b1;
      end
    end
  end

  // the slot being filled must be free (or be freed in the same cycle)
  a_ins_free: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               ins_i |-> !(valid_q[ins_slot_i] && !(iss_i && iss_slot_i == ins_slot_i)));
  // only a ready entry may issue
  a_iss_ready: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                iss_i |-> ready_o[iss_slot_i]);

endmodule
