// sv_inst_selector: random instruction selection (D-Box + priority encoder).
//
// Each cycle the selector picks one ready shuffle-buffer entry. Drawing a
// random number that only hits ready entries is costly, so the paper's rule is
// to take the ready entry closest to a random start index r, searching
// r, r+1, r-1, r+2, r-2, ... (indices modulo N). The search order for every r
// is a constant table, the D-Box: column r, row k holds the k-th index to try
// (Fig. 6 of the paper prints the 5-entry table; row 0 is r, odd row k is
// r+(k+1)/2, even row k is r-k/2). The ready bits are gathered in column
// order, a priority encoder finds the first set one, and its row number
// indexes the same D-Box column to give the selected entry.
//
// Two overrides come before the random pick:
//  * SHORTCUT_CF (the paper's "F" option, on in the evaluated SV-F
//    configuration): a ready branch or jump is taken at once, so that fetch,
//    which is halted while a control-flow instruction is pending, resumes
//    sooner.
//  * shuffle_en_i = 0 (protection switched off in the CSR): the oldest entry is
//    issued, i.e. program order. The oldest entry is always ready because it
//    can only depend on older entries.
// The random index is rnd_i modulo N. Combinational.
module sv_inst_selector #(
  parameter int unsigned N           = 4,
  parameter bit          SHORTCUT_CF = 1'b1,
  parameter int unsigned IW          = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  ready_i,
  input  logic [N-1:0]  cf_i,          // entry holds a branch or jump
  input  logic [N-1:0]  oldest_i,      // one-hot oldest valid entry
  input  logic          shuffle_en_i,
  input  logic [15:0]   rnd_i,
  output logic          sel_valid_o,
  output logic [IW-1:0] sel_idx_o,
  output logic [IW-1:0] start_idx_o    // random start index actually used
);

  // D-Box entry: index tried in row k of column r
  function automatic logic [IW-1:0] dbox(input int unsigned r, input int unsigned k);
    int unsigned d;
    d = (k + 1) / 2;
    if (k == 0)          return IW'(r);
    else if (k % 2 == 1) return IW'((r + d) % N);
    else                 return IW'((r + N - (d % N)) % N);
  endfunction

  logic [IW-1:0] r;
  logic [N-1:0]  gathered;
  logic [IW-1:0] first_row;
  logic          any_ready;

  assign r           = IW'(rnd_i % 16'(N));
  assign start_idx_o = r;

  always_comb begin
    // gather the ready bits in the order of column r
    gathered = '0;
    for (int unsigned c = 0; c < N; c++) begin
      if (r == IW'(c)) begin
        for (int unsigned k = 0; k < N; k++) gathered[k] = ready_i[dbox(c, k)];
      end
    end
    // priority encoder: first '1'
    first_row = '0;
    any_ready = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      if (gathered[k]) begin
        first_row = IW'(k);
        any_ready = 1'b1;
      end
    end
  end

  always_comb begin
    sel_valid_o = any_ready;
    sel_idx_o   = '0;
    // random pick through the D-Box
    for (int unsigned c = 0; c < N; c++) begin
      if (r == IW'(c)) begin
        for (int unsigned k = 0; k < N; k++) begin
          if (first_row == IW'(k)) sel_idx_o = dbox(c, k);
        end
      end
    end
    // branch/jump first (option F)
    if (SHORTCUT_CF) begin
      for (int i = N - 1; i >= 0; i--) begin
        if (ready_i[i] && cf_i[i]) sel_idx_o = IW'(i);
      end
    end
    // in-order issue when shuffling is off
    if (!shuffle_en_i) begin
      for (int i = N - 1; i >= 0; i--) begin
        if (oldest_i[i]) sel_idx_o = IW'(i);
      end
      sel_valid_o = |oldest_i;
    end
  end

endmodule
