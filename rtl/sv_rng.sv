// sv_rng: pseudo-random number generator of the ShuffleV core.
//
// The core needs a fresh random word every cycle: the instruction selector
// uses it as the start index of its search and the dummy instruction
// generator draws its operation, operands and insertion interval from it.
// The paper adopts a generator that combines a linear feedback shift register
// (LFSR) with a cellular-automata shift register (CASR) and does not describe
// its internals. This block follows the commonly used construction of that
// kind: a 43-bit Fibonacci LFSR with taps for x^43+x^41+x^20+x+1 and a 37-bit
// hybrid rule-90/rule-150 cellular automaton (rule 150 at cell 28, rule 90
// elsewhere, null boundaries). The output is the XOR of the low 32 bits of the
// two registers. The feedback taps, the CA rule vector and the seeds are this
// design's choice (taken from the general literature on LFSR/CASR
// generators), not values printed in the paper.
//
// Interface: rnd_o changes every cycle while en_i is high; seed_we_i loads
// new seeds (both registers are forced non-zero). Timing: one new word per
// clock, output registered.
module sv_rng #(
  parameter logic [42:0] LFSR_SEED = 43'h2A5_5A5A_5A5A,
  parameter logic [36:0] CASR_SEED = 37'h1B_C0DE_1234
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        seed_we_i,
  input  logic [42:0] seed_lfsr_i,
  input  logic [36:0] seed_casr_i,
  output logic [31:0] rnd_o
);

  logic [42:0] lfsr_q, lfsr_d;
  logic [36:0] casr_q, casr_d;

  // LFSR: shift left, feedback from taps 43, 41, 20, 1 (1-based)
  always_comb begin
    lfsr_d = {lfsr_q[41:0], lfsr_q[42] ^ lfsr_q[40] ^ lfsr_q[19] ^ lfsr_q[0]};
  end

  // CASR: rule 90 = left ^ right, rule 150 = left ^ self ^ right
  always_comb begin
    for (int i = 0; i < 37; i++) begin
      logic l, r;
      l = (i == 36) ? 1'b0 : casr_q[i+1];
      r = (i == 0)  ? 1'b0 : casr_q[i-1];
      casr_d[i] = (i == 28) ? (l ^ casr_q[i] ^ r) : (l ^ r);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lfsr_q <= LFSR_SEED;
      casr_q <= CASR_SEED;
    end else if (seed_we_i) begin
      lfsr_q <= (seed_lfsr_i == '0) ? LFSR_SEED : seed_lfsr_i;
      casr_q <= (seed_casr_i == '0) ? CASR_SEED : seed_casr_i;
    end else if (en_i) begin
      lfsr_q <= lfsr_d;
      casr_q <= casr_d;
    end
  end

  assign rnd_o = lfsr_q[31:0] ^ casr_q[31:0];

endmodule
