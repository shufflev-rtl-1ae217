// sv_dep_track: dependency tracking for an instruction entering the shuffle buffer.
//
// Produces the N dependency bits of the new entry: bit j is set when the new
// instruction must wait for pending entry j. After renaming only true
// read-after-write hazards remain, so a register dependency exists when a
// source physical register of the new instruction equals the destination
// physical register of a pending entry (Sec. III-A of the paper). Memory and
// serializing instructions add further bits:
//  * OPT_MEM = 0 (the configuration without the paper's "M" option): every
//    load or store depends on every earlier pending load or store.
//  * OPT_MEM = 1 ("M" option): two loads never depend on each other; a pair
//    with a store depends unless both use the same base physical register and
//    their byte ranges [offset, offset+size) do not overlap.
//  * FENCE, FENCE.I, ECALL, EBREAK and CSR instructions depend on every pending
//    entry, and every later instruction depends on them.
// Comparing the base as a renamed physical register (rather than the logical
// register) is this design's choice: equal physical registers guarantee equal
// base values.
//
// mem_opt_en_i turns the M rules off at run time (the control register's
// load/store optimisation bit); with it low the strict rule applies.
//
// Combinational; pend_valid_i must already exclude the entry that issues in
// the same cycle.
module sv_dep_track
  import shufflev_pkg::*;
#(
  parameter int unsigned N       = 4,
  parameter int unsigned PW      = 6,
  parameter bit          OPT_MEM = 1'b0
) (
  // new instruction
  input  logic          mem_opt_en_i,
  input  predec_t       new_pd_i,
  input  logic [PW-1:0] new_rs1_p_i,
  input  logic [PW-1:0] new_rs2_p_i,
  // pending entries
  input  logic [N-1:0]  pend_valid_i,
  input  predec_t       pend_pd_i   [N],
  input  logic [PW-1:0] pend_rd_p_i [N],
  input  logic [PW-1:0] pend_rs1_p_i[N],
  output logic [N-1:0]  dep_o
);

  function automatic logic [1:0] nbytes_log2(input logic [1:0] sz);
    return (sz == 2'd3) ? 2'd2 : sz;
  endfunction

  // do the byte ranges of two accesses off the same base overlap?
  function automatic logic ranges_overlap(input logic [11:0] off_a, input logic [1:0] sz_a,
                                          input logic [11:0] off_b, input logic [1:0] sz_b);
    logic signed [13:0] a_lo, a_hi, b_lo, b_hi;
    a_lo = 14'(signed'(off_a));
    b_lo = 14'(signed'(off_b));
    a_hi = a_lo + 14'(1 << nbytes_log2(sz_a));
    b_hi = b_lo + 14'(1 << nbytes_log2(sz_b));
    return (a_lo < b_hi) && (b_lo < a_hi);
  endfunction

  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic raw, memdep, serdep;
      raw = pend_pd_i[j].writes_rd &&
            ((new_pd_i.uses_rs1 && new_rs1_p_i == pend_rd_p_i[j]) ||
             (new_pd_i.uses_rs2 && new_rs2_p_i == pend_rd_p_i[j]));
      memdep = 1'b0;
      if (new_pd_i.mem != MEM_NONE && pend_pd_i[j].mem != MEM_NONE) begin
        if (!(OPT_MEM && mem_opt_en_i)) begin
          memdep = 1'b1;
        end else if (new_pd_i.mem == MEM_STORE || pend_pd_i[j].mem == MEM_STORE) begin
          memdep = (new_rs1_p_i != pend_rs1_p_i[j]) ||
                   ranges_overlap(new_pd_i.mem_off, new_pd_i.mem_size,
                                  pend_pd_i[j].mem_off, pend_pd_i[j].mem_size);
        end
      end
      serdep   = new_pd_i.serial || pend_pd_i[j].serial;
      dep_o[j] = pend_valid_i[j] && (raw || memdep || serdep);
    end
  end

endmodule
