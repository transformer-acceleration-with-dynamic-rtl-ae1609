// topk_select: streaming top-k selection for one attention row.
//
// Scores arrive one per cycle with their column index. The unit keeps the N
// largest seen so far in a register list sorted from largest to smallest. On
// each insertion every entry compares itself with the new score in parallel:
// entries whose score is >= the new one stay, the first entry below it takes
// the new score, and the rest shift one place down (the last one falls off).
// Ties therefore keep the earlier column ahead. No sorting network and no
// popcount is needed.
//
// Interface: pulse clear to empty the list; in_valid inserts (in_score,
// in_idx) at the next clock edge. The list (entry_score/entry_idx, entry 0 the
// largest) and count are registered outputs, valid the cycle after the last
// insertion.
//
// Follows the paper: the mask M keeps the top-k approximate scores of each row
// and every row keeps the same number (the row-wise constraint that balances
// the PEs). Own choices: the insertion-list structure and tie order.
module topk_select #(
  parameter int N     = 200,  // entries kept (TOPK = 10 % of l = 2000)
  parameter int SC_W  = 16,   // score width (signed)
  parameter int IDX_W = 11    // column index width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic                           in_valid,
  input  logic signed [SC_W-1:0]         in_score,
  input  logic [IDX_W-1:0]               in_idx,
  output logic signed [SC_W-1:0]         entry_score [N],
  output logic [IDX_W-1:0]               entry_idx   [N],
  output logic [$clog2(N+1)-1:0]         count
);

  logic [N-1:0] valid;
  logic [N-1:0] stay;   // entry i ranks at or above the new score

  always_comb begin
    for (int i = 0; i < N; i++)
      stay[i] = valid[i] && (entry_score[i] >= in_score);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      count <= '0;
      for (int i = 0; i < N; i++) begin
        entry_score[i] <= '0;
        entry_idx[i]   <= '0;
      end
    end else if (clear) begin
      valid <= '0;
      count <= '0;
    end else if (in_valid) begin
      // entry 0: only the new score can displace it
      if (!stay[0]) begin
        entry_score[0] <= in_score;
        entry_idx[0]   <= in_idx;
        valid[0]       <= 1'b1;
      end
      for (int i = 1; i < N; i++) begin
        if (!stay[i]) begin
          if (stay[i-1]) begin
            entry_score[i] <= in_score;
            entry_idx[i]   <= in_idx;
            valid[i]       <= 1'b1;
          end else begin
            entry_score[i] <= entry_score[i-1];
            entry_idx[i]   <= entry_idx[i-1];
            valid[i]       <= valid[i-1];
          end
        end
      end
      if (count != ($clog2(N+1))'(N)) count <= count + 1'b1;
    end
  end

endmodule
