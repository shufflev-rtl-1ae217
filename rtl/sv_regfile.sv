// sv_regfile: physical register file of the ShuffleV core.
//
// The paper enlarges the base core's register file so that renamed
// (physical) registers can be addressed; its size is not given and is a
// parameter here (default 48, see the renaming unit). Physical register 0 is
// the image of architectural x0: it reads as zero and ignores writes. Two
// asynchronous read ports, one synchronous write port. All registers reset to
// zero, so the identity mapping after reset gives an all-zero architectural
// state.
module sv_regfile #(
  parameter int unsigned NUM_PREGS = 48,
  parameter int unsigned PW        = $clog2(NUM_PREGS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [PW-1:0] raddr_a_i,
  output logic [31:0]   rdata_a_o,
  input  logic [PW-1:0] raddr_b_i,
  output logic [31:0]   rdata_b_o,
  input  logic          we_i,
  input  logic [PW-1:0] waddr_i,
  input  logic [31:0]   wdata_i
);

  logic [31:0] regs_q [NUM_PREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_PREGS; i++) regs_q[i] <= '0;
    end else if (we_i && waddr_i != '0 && 32'(waddr_i) < NUM_PREGS) begin
      regs_q[waddr_i] <= wdata_i;
    end
  end

  assign rdata_a_o = (raddr_a_i == '0 || 32'(raddr_a_i) >= NUM_PREGS) ? '0 : regs_q[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == '0 || 32'(raddr_b_i) >= NUM_PREGS) ? '0 : regs_q[raddr_b_i];

endmodule
