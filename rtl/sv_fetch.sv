// sv_fetch: program counter and fetch control of the ShuffleV core.
//
// Fetches one instruction per cycle from the instruction memory into the
// shuffle buffer. In the configuration without speculative fetch (the
// evaluated ShuffleV-F), the core cannot know where to fetch after a branch or
// jump until that instruction has executed, so fetching stops from the moment
// a control-flow instruction enters the shuffle buffer until the execute stage
// resolves it and returns the next PC (paper Sec. III-C, Fig. 7). While fetch
// is halted the shuffle buffer is allowed to drain; afterwards it is refilled.
//
// OPT_JAL (the paper's "J" option, off by default): JAL targets are computed
// here from the instruction itself, so JAL does not halt fetch; the JAL still
// goes through the buffer to write its link register.
//
// Interface: pc_o is the fetch address; fetch_en_o says that fetching is
// allowed; accept_i reports that the word at pc_o entered the buffer this
// cycle, with its class cf_i and JAL offset. redirect_i/redirect_pc_i come from
// the execute stage when a branch or jump executes. The PC is updated on the
// next clock edge.
module sv_fetch
  import shufflev_pkg::*;
#(
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000,
  parameter bit          OPT_JAL   = 1'b0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  output logic [31:0] pc_o,
  output logic        fetch_en_o,
  output logic        cf_pending_o,
  input  logic        accept_i,
  input  cf_e         cf_i,
  input  logic [31:0] jal_off_i,
  input  logic        redirect_i,
  input  logic [31:0] redirect_pc_i
);

  logic [31:0] pc_q;
  logic        cf_pending_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q         <= BOOT_ADDR;
      cf_pending_q <= 1'b0;
    end else if (redirect_i) begin
      pc_q         <= redirect_pc_i;
      cf_pending_q <= 1'b0;
    end else if (accept_i) begin
      if (OPT_JAL && cf_i == CF_JAL) begin
        pc_q <= pc_q + jal_off_i;
      end else begin
        pc_q <= pc_q + 32'd4;
        if (cf_i != CF_NONE) cf_pending_q <= 1'b1;
      end
    end
  end

  assign pc_o         = pc_q;
  assign cf_pending_o = cf_pending_q;
  assign fetch_en_o   = ~cf_pending_q;

  a_no_fetch_when_pending: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                            cf_pending_q |-> !accept_i);

endmodule
