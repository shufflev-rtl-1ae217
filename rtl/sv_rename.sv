// sv_rename: register renaming unit of the ShuffleV core.
//
// Renaming removes the write-after-write and write-after-read hazards that
// come from register reuse, so that only true read-after-write dependencies
// limit how far instructions can be shuffled. The unit holds the
// logical-to-physical mapping table (one entry per architectural register).
// Every fetched instruction that writes a register gets a fresh physical
// register; its sources are translated through the current table.
//
// Following the paper, a physical register is free when it is neither in the
// mapping table nor named (as rd, rs1 or rs2) by any valid shuffle-buffer
// entry. The shuffle buffer supplies that "referenced" vector (ref_i). Logical
// x0 always maps to physical register 0, which is never allocated, so it reads
// as zero and absorbs writes. The number of physical registers is not given in
// the paper; the default (48) is this design's choice and is enough for a
// 4-entry buffer never to run out (31 mapped + 3 per entry + 1 spare). With
// fewer registers alloc_ok_o can go low and the core stalls fetch.
//
// Interface: combinational lookup of rs1/rs2 and allocation of a free
// register (lowest-numbered free one); the table is updated on the clock edge
// when alloc_i is high. Reset restores the identity mapping x[i] -> p[i].
module sv_rename #(
  parameter int unsigned NUM_PREGS = 48,
  parameter int unsigned PW        = $clog2(NUM_PREGS)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // lookup
  input  logic [4:0]           rs1_i,
  input  logic [4:0]           rs2_i,
  output logic [PW-1:0]        rs1_p_o,
  output logic [PW-1:0]        rs2_p_o,
  // allocation for the destination register
  input  logic [4:0]           rd_i,
  input  logic                 alloc_i,    // commit the allocation this cycle
  output logic [PW-1:0]        rd_p_o,     // free register that would be given
  output logic                 alloc_ok_o, // a free register exists
  // physical registers named by valid shuffle-buffer entries
  input  logic [NUM_PREGS-1:0] ref_i
);

  logic [PW-1:0]        map_q [32];
  logic [NUM_PREGS-1:0] in_map;
  logic [NUM_PREGS-1:0] free_vec;

  assign rs1_p_o = map_q[rs1_i];
  assign rs2_p_o = map_q[rs2_i];

  always_comb begin
    in_map = '0;
    for (int i = 0; i < 32; i++) in_map[map_q[i]] = 1'b1;
    free_vec    = ~(in_map | ref_i);
    free_vec[0] = 1'b0;
  end

  // lowest free physical register
  always_comb begin
    rd_p_o     = '0;
    alloc_ok_o = 1'b0;
    for (int i = NUM_PREGS - 1; i >= 1; i--) begin
      if (free_vec[i]) begin
        rd_p_o     = PW'(i);
        alloc_ok_o = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < 32; i++) map_q[i] <= PW'(i);
    end else if (alloc_i && alloc_ok_o && rd_i != 5'd0) begin
      map_q[rd_i] <= rd_p_o;
    end
  end

endmodule
