// reorder_sched: per-step column schedule for the row-parallel PE array.
//
// Each of the NPE high-precision PEs owns one attention row and must visit
// every column selected in that row's mask. The scheduler holds one pending
// bit per (PE, column) and each step hands every PE one pending column.
//
//  * reorder_en = 0 (row-parallel, no reordering): every PE takes its lowest
//    pending column, i.e. works left to right.
//  * reorder_en = 1 (compute reordering): each PE's lowest pending column is a
//    candidate; the candidate pending in the most rows wins (ties: lowest PE
//    number). Every PE that has the winner pending takes it, so one fetch of
//    that K column / V row serves all of them; the others take their own lowest
//    pending column.
//
// fetch_count is the number of distinct columns handed out in the step: the
// number of K-column (SDDMM) or V-row (SpMM) reads the step costs. shared is
// high when at least two PEs take the same column.
//
// Interface and timing: clear empties all bits; load_valid sets bit
// load_idx[p] of every PE p (one index per PE per cycle). col/col_valid/
// fetch_count are combinational from the pending bits; step retires the
// handed-out columns at the clock edge. Because every row holds the same
// number of columns (row-wise constraint), all PEs finish in the same step.
//
// Follows the paper: row-parallel PEs, reordering within each row so that
// column locality is shared (Fig. 11), A never reshuffled. The winner-takes-
// most greedy rule is this design's own; the paper gives no algorithm.
module reorder_sched #(
  parameter int L   = 2000,  // sequence length (columns)
  parameter int NPE = 4      // PEs / rows in flight
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         load_valid,
  input  logic [$clog2(L)-1:0]         load_idx  [NPE],
  input  logic                         reorder_en,
  input  logic                         step,
  output logic [$clog2(L)-1:0]         col       [NPE],
  output logic [NPE-1:0]               col_valid,
  output logic [$clog2(NPE+1)-1:0]     fetch_count,
  output logic                         shared,
  output logic                         empty
);

  localparam int IDX_W = $clog2(L);
  localparam int CW    = $clog2(NPE + 1);

  logic [L-1:0]     pending [NPE];
  logic [IDX_W-1:0] first   [NPE];
  logic [NPE-1:0]   has;
  logic [CW-1:0]    votes   [NPE];
  logic [IDX_W-1:0] chosen;

  always_comb begin
    // lowest pending column of each PE
    for (int p = 0; p < NPE; p++) begin
      first[p] = '0;
      has[p]   = |pending[p];
      for (int c = L - 1; c >= 0; c--)
        if (pending[p][c]) first[p] = IDX_W'(c);
    end
    // how many rows share each candidate
    for (int p = 0; p < NPE; p++) begin
      votes[p] = '0;
      if (has[p])
        for (int q = 0; q < NPE; q++)
          votes[p] += CW'(pending[q][first[p]]);
    end
    // winner: most votes, lowest PE on ties
    chosen = first[0];
    begin
      logic [CW-1:0] best;
      best = '0;
      for (int p = 0; p < NPE; p++)
        if (votes[p] > best) begin
          best   = votes[p];
          chosen = first[p];
        end
    end
    // hand out
    for (int p = 0; p < NPE; p++) begin
      col_valid[p] = has[p];
      col[p]       = (reorder_en && pending[p][chosen]) ? chosen : first[p];
    end
    // distinct columns handed out
    fetch_count = '0;
    shared      = 1'b0;
    for (int p = 0; p < NPE; p++) begin
      logic dup;
      dup = 1'b0;
      for (int q = 0; q < p; q++)
        if (col_valid[q] && col[q] == col[p]) dup = 1'b1;
      if (col_valid[p] && !dup) fetch_count += 1'b1;
      if (col_valid[p] && dup)  shared = 1'b1;
    end
  end

  assign empty = ~|has;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPE; p++) pending[p] <= '0;
    end else if (clear) begin
      for (int p = 0; p < NPE; p++) pending[p] <= '0;
    end else begin
      for (int p = 0; p < NPE; p++) begin
        if (step && col_valid[p]) pending[p][col[p]]      <= 1'b0;
        if (load_valid)           pending[p][load_idx[p]] <= 1'b1;
      end
    end
  end

endmodule
