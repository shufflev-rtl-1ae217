// tb_sv_rng: checks the LFSR/CASR generator against a bit-level model written
// from the generator definition (feedback polynomial x^43+x^41+x^20+x+1,
// rule-90/150 automaton with rule 150 at cell 28), the hold on en_i = 0,
// reseeding, the zero-seed guard, and that outputs do not repeat early.
`timescale 1ns/1ps
module tb_sv_rng;
  logic clk = 0, rst_n = 0, en = 0, seed_we = 0;
  logic [42:0] seed_l = '0;
  logic [36:0] seed_c = '0;
  logic [31:0] rnd;
  always #5 clk = ~clk;
  sv_rng dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .seed_we_i(seed_we),
              .seed_lfsr_i(seed_l), .seed_casr_i(seed_c), .rnd_o(rnd));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model state
  bit ml [43];
  bit mc [37];
  task automatic model_load(logic [42:0] l, logic [36:0] c);
    for (int i = 0; i < 43; i++) ml[i] = l[i];
    for (int i = 0; i < 37; i++) mc[i] = c[i];
  endtask
  task automatic model_step();
    bit nl [43]; bit nc [37];
    nl[0] = ml[42] ^ ml[40] ^ ml[19] ^ ml[0];
    for (int i = 1; i < 43; i++) nl[i] = ml[i-1];
    for (int i = 0; i < 37; i++) begin
      bit left, right;
      left  = (i < 36) ? mc[i+1] : 0;
      right = (i > 0)  ? mc[i-1] : 0;
      nc[i] = left ^ right ^ ((i == 28) ? mc[i] : 0);
    end
    ml = nl; mc = nc;
  endtask
  function automatic logic [31:0] model_out();
    logic [31:0] o;
    for (int i = 0; i < 32; i++) o[i] = ml[i] ^ mc[i];
    return o;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] seen [$];
    logic [31:0] held;
    int dup;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    model_load(43'h2A5_5A5A_5A5A, 37'h1B_C0DE_1234);
    check(rnd == model_out(), "reset value");
    en = 1;
    for (int i = 0; i < 500; i++) begin
      @(posedge clk); #1 model_step();
      check(rnd == model_out(), $sformatf("step %0d: %h vs model %h", i, rnd, model_out()));
    end
    en = 0; held = rnd;
    repeat (5) @(posedge clk);
    #1 check(rnd == held, "holds while en_i = 0");
    seed_l = 43'h1; seed_c = 37'h5; seed_we = 1;
    @(posedge clk); #1 seed_we = 0; model_load(43'h1, 37'h5);
    check(rnd == model_out(), "reseed");
    seed_l = '0; seed_c = '0; seed_we = 1;
    @(posedge clk); #1 seed_we = 0; model_load(43'h2A5_5A5A_5A5A, 37'h1B_C0DE_1234);
    check(rnd == model_out(), "zero seed replaced by default");
    en = 1; dup = 0;
    for (int i = 0; i < 2000; i++) begin
      @(posedge clk); #1;
      foreach (seen[j]) if (seen[j] == rnd) dup++;
      if (i < 300) seen.push_back(rnd);
    end
    check(dup == 0, $sformatf("no repeated word among early outputs (%0d repeats)", dup));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
