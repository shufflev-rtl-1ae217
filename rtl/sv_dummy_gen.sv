// sv_dummy_gen: dummy instruction generator.
//
// As an optional extra defence, ShuffleV inserts a dummy instruction into the
// execute stage after a random number of real instructions: 0..4, 0..8 or
// 0..16, chosen in the control CSR. The dummy is one of ADD, AND, MUL or MULH,
// picked at random; DIV is deliberately not used because of its long and
// recognisable execution time (paper Sec. III-D). The paper gives the
// operation set and the intervals; the rest is this design's choice and is
// modelled on the base core's own dummy mechanism: the operands are two
// random physical registers (so the dummy handles real data), the result goes
// to physical register 0 and is discarded, a counter counts real
// instructions issued since the last dummy, and a new random threshold in
// 0..interval is drawn after each dummy.
//
// Interface: due_o is high when a dummy is owed; the core then issues
// instr_o/rs1_p_o/rs2_p_o instead of a buffer entry and pulses fire_i.
// real_issue_i pulses for every real instruction issued. Registered state,
// combinational outputs.
module sv_dummy_gen
  import shufflev_pkg::*;
#(
  parameter int unsigned NUM_PREGS = 48,
  parameter int unsigned PW        = $clog2(NUM_PREGS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          en_i,
  input  logic [1:0]    sel_i,
  input  logic [31:0]   rnd_i,
  input  logic          real_issue_i,
  input  logic          fire_i,
  output logic          due_o,
  output logic [31:0]   instr_o,
  output logic [PW-1:0] rs1_p_o,
  output logic [PW-1:0] rs2_p_o
);

  logic [4:0] cnt_q, thr_q, interval, new_thr;

  assign interval = dummy_interval(sel_i);
  assign new_thr  = 5'(rnd_i[23:16] % ({3'd0, interval} + 8'd1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      thr_q <= '0;
    end else if (fire_i) begin
      cnt_q <= '0;
      thr_q <= new_thr;
    end else if (real_issue_i && cnt_q != 5'd31) begin
      cnt_q <= cnt_q + 5'd1;
    end
  end

  assign due_o = en_i && (cnt_q >= thr_q);

  // random ALU operation: ADD, AND, MUL, MULH; rd = x0
  always_comb begin
    logic [4:0] r1, r2;
    r1 = rnd_i[4:0];
    r2 = rnd_i[9:5];
    unique case (rnd_i[11:10])
      2'd0:    instr_o = {7'b0000000, r2, r1, 3'b000, 5'd0, OPC_OP};  // ADD
      2'd1:    instr_o = {7'b0000000, r2, r1, 3'b111, 5'd0, OPC_OP};  // AND
      2'd2:    instr_o = {7'b0000001, r2, r1, 3'b000, 5'd0, OPC_OP};  // MUL
      default: instr_o = {7'b0000001, r2, r1, 3'b001, 5'd0, OPC_OP};  // MULH
    endcase
    rs1_p_o = PW'(rnd_i[31:24] % 8'(NUM_PREGS));
    rs2_p_o = PW'(rnd_i[7:0] % 8'(NUM_PREGS));
  end

endmodule
