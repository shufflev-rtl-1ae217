// sv_csr: ShuffleV control register and cycle counter.
//
// The paper adds a configuration bit to the control and status registers that
// lets software switch the protection off, e.g. around interrupt handlers or
// time-critical code. This block holds that bit in a custom machine-mode CSR
// (SVCTRL, address 0x7C1, this design's choice) together with the dummy
// instruction enable and interval select:
//   bit 0   shuffle enable        (reset: SHUFFLE_RESET)
//   bit 1   dummy insertion enable (reset: DUMMY_RESET)
//   bits 3:2 dummy interval: 0 -> every 0..4, 1 -> 0..8, 2/3 -> 0..16 instructions
//   bit 4   load/store optimisation enable (reset 1); only has an effect when
//           the core is built with the M option, and lets software fall back
//           to strict load/store ordering around memory-mapped I/O
// It also provides the standard read-only cycle counter (cycle/cycleh,
// 0xC00/0xC80) so programs can time themselves.
//
// Interface: one access per cycle from the execute stage; the read is
// combinational, the write (CSRRW/S/C semantics resolved by the execute stage
// into a full write value) takes effect on the clock edge.
module sv_csr
  import shufflev_pkg::*;
#(
  parameter bit         SHUFFLE_RESET = 1'b1,
  parameter bit         DUMMY_RESET   = 1'b0,
  parameter logic [1:0] DUMMY_SEL_RESET = 2'd2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [11:0] addr_i,
  input  logic        we_i,
  input  logic [31:0] wdata_i,
  output logic [31:0] rdata_o,
  output logic        shuffle_en_o,
  output logic        dummy_en_o,
  output logic [1:0]  dummy_sel_o,
  output logic        mem_opt_en_o
);

  logic [4:0]  svctrl_q;
  logic [63:0] cycle_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      svctrl_q <= {1'b1, DUMMY_SEL_RESET, DUMMY_RESET, SHUFFLE_RESET};
      cycle_q  <= '0;
    end else begin
      cycle_q <= cycle_q + 64'd1;
      if (we_i && addr_i == CSR_SVCTRL) svctrl_q <= wdata_i[4:0];
    end
  end

  always_comb begin
    unique case (addr_i)
      CSR_SVCTRL: rdata_o = {27'd0, svctrl_q};
      12'hC00:    rdata_o = cycle_q[31:0];
      12'hC80:    rdata_o = cycle_q[63:32];
      default:    rdata_o = '0;
    endcase
  end

  assign shuffle_en_o = svctrl_q[SVCTRL_SHUFFLE_BIT];
  assign dummy_en_o   = svctrl_q[SVCTRL_DUMMY_BIT];
  assign dummy_sel_o  = svctrl_q[3:2];
  assign mem_opt_en_o = svctrl_q[SVCTRL_MEMOPT_BIT];

endmodule
