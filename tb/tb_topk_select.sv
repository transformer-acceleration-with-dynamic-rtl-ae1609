// tb_topk_select: random streams (with many ties) into a small top-k unit; the
// kept list is compared, entry by entry, with a stable descending selection
// computed here. Also checks the count and that clear empties the list.
module tb_topk_select;
  localparam int N = 8, SC_W = 6, IDX_W = 6, LEN = 40;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [SC_W-1:0] in_score;
  logic [IDX_W-1:0] in_idx;
  logic signed [SC_W-1:0] es [N];
  logic [IDX_W-1:0] ei [N];
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0;

  topk_select #(.N(N), .SC_W(SC_W), .IDX_W(IDX_W)) dut (
    .clk, .rst_n, .clear, .in_valid, .in_score, .in_idx,
    .entry_score(es), .entry_idx(ei), .count);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int sc [LEN];
    int ref_i [N];
    int ref_s [N];
    bit used [LEN];
    in_score = 0; in_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int len;
      len = (round == 0) ? 5 : LEN;   // first round: fewer than N inputs
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      check(count == 0, "clear empties list");
      for (int j = 0; j < len; j++) begin
        sc[j] = (round % 2) ? int'($urandom_range(0, 7)) - 4 : int'($urandom_range(0, 63)) - 32;
        in_valid = 1; in_score = SC_W'(sc[j]); in_idx = IDX_W'(j);
        @(negedge clk);
      end
      in_valid = 0;
      // reference: repeatedly take the largest, earliest on ties
      for (int j = 0; j < LEN; j++) used[j] = 0;
      for (int k = 0; k < N && k < len; k++) begin
        int best;
        best = -1;
        for (int j = 0; j < len; j++)
          if (!used[j] && (best < 0 || sc[j] > sc[best])) best = j;
        used[best] = 1; ref_i[k] = best; ref_s[k] = sc[best];
      end
      check(int'(count) == ((len < N) ? len : N), $sformatf("count round %0d", round));
      for (int k = 0; k < N && k < len; k++) begin
        check(int'(ei[k]) == ref_i[k] && int'(es[k]) == ref_s[k],
              $sformatf("round %0d entry %0d: got idx %0d score %0d, want %0d %0d",
                        round, k, ei[k], es[k], ref_i[k], ref_s[k]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
