// tb_reorder_sched: (1) the four-PE example of the compute-reordering figure,
// scheduled without and with reordering, with the step-by-step assignments
// and the total number of distinct column fetches worked out by hand;
// (2) random row sets of equal size, checked against a reference model of the
// greedy rule written here, plus the invariants: every PE visits exactly its
// own columns, once each, and all PEs finish in the same step.
module tb_reorder_sched;
  localparam int L = 16, NPE = 4, IW = $clog2(L);
  logic clk = 0, rst_n = 0, clear = 0, load_valid = 0, reorder_en = 0, step = 0;
  logic [IW-1:0] load_idx [NPE];
  logic [IW-1:0] col [NPE];
  logic [NPE-1:0] col_valid;
  logic [$clog2(NPE+1)-1:0] fetch_count;
  logic shared, empty;
  int checks = 0, failures = 0;

  reorder_sched #(.L(L), .NPE(NPE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  bit sets [NPE][L];

  task automatic load(input int n);
    // n indices per PE, taken from sets[][] in ascending order
    int pos [NPE];
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int p = 0; p < NPE; p++) pos[p] = 0;
    for (int k = 0; k < n; k++) begin
      for (int p = 0; p < NPE; p++) begin
        while (!sets[p][pos[p]]) pos[p]++;
        load_idx[p] = IW'(pos[p]); pos[p]++;
      end
      load_valid = 1; @(negedge clk);
    end
    load_valid = 0;
  endtask

  // reference greedy model on a copy of the sets
  function automatic void ref_step(inout bit pend [NPE][L], input bit reo, output int rc [NPE]);
    int first [NPE];
    int votes, best, chosen;
    for (int p = 0; p < NPE; p++) begin
      first[p] = -1;
      for (int c = 0; c < L; c++) if (pend[p][c] && first[p] < 0) first[p] = c;
    end
    best = 0; chosen = first[0];
    for (int p = 0; p < NPE; p++) begin
      votes = 0;
      if (first[p] >= 0) for (int q = 0; q < NPE; q++) votes += pend[q][first[p]];
      if (votes > best) begin best = votes; chosen = first[p]; end
    end
    for (int p = 0; p < NPE; p++) begin
      rc[p] = (reo && chosen >= 0 && pend[p][chosen]) ? chosen : first[p];
      if (rc[p] >= 0) pend[p][rc[p]] = 0;
    end
  endfunction

  task automatic run(input int n, input bit reo, input int want_total, input string tag);
    bit pend [NPE][L];
    bit seen [NPE][L];
    int rc [NPE];
    int total = 0, steps = 0;
    pend = sets;
    foreach (seen[p, c]) seen[p][c] = 0;
    reorder_en = reo;
    load(n);
    while (!empty && steps < 2 * L) begin
      int distinct;
      ref_step(pend, reo, rc);
      distinct = 0;
      for (int p = 0; p < NPE; p++) begin
        bit dup; dup = 0;
        for (int q = 0; q < p; q++) if (rc[q] == rc[p]) dup = 1;
        if (!dup) distinct++;
        check(col_valid[p] && int'(col[p]) == rc[p],
              $sformatf("%s step %0d PE%0d col %0d want %0d", tag, steps, p, col[p], rc[p]));
        if (seen[p][col[p]] || !sets[p][col[p]]) begin
          check(0, $sformatf("%s PE%0d visits col %0d twice or not selected", tag, p, col[p]));
        end
        seen[p][col[p]] = 1;
      end
      check(int'(fetch_count) == distinct, $sformatf("%s fetch_count", tag));
      check(shared == (distinct < NPE), $sformatf("%s shared flag", tag));
      total += int'(fetch_count);
      step = 1; @(negedge clk); step = 0;
      steps++;
    end
    check(steps == n, $sformatf("%s steps %0d want %0d (balanced rows)", tag, steps, n));
    foreach (seen[p, c]) if (sets[p][c] && !seen[p][c]) check(0, $sformatf("%s missed PE%0d col %0d", tag, p, c));
    if (want_total >= 0)
      check(total == want_total, $sformatf("%s total fetches %0d want %0d", tag, total, want_total));
    $display("%s: %0d steps, %0d fetches", tag, steps, total);
  endtask

  initial begin
    for (int p = 0; p < NPE; p++) load_idx[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // example of the figure: PE1 {0,1,2}, PE2 {1,2,3}, PE3 {1,4,5}, PE4 {2,3,4}
    foreach (sets[p, c]) sets[p][c] = 0;
    sets[0][0] = 1; sets[0][1] = 1; sets[0][2] = 1;
    sets[1][1] = 1; sets[1][2] = 1; sets[1][3] = 1;
    sets[2][1] = 1; sets[2][4] = 1; sets[2][5] = 1;
    sets[3][2] = 1; sets[3][3] = 1; sets[3][4] = 1;
    run(3, 0, 11, "fig-in-order");   // steps {0,1,2} {1,2,3,4} {2,3,4,5}
    run(3, 1, 9,  "fig-reordered");  // steps {1,2} {2,3,4} {0,3,4,5}
    // random rows with 5 columns each, clustered to create locality
    for (int r = 0; r < 30; r++) begin
      foreach (sets[p, c]) sets[p][c] = 0;
      for (int p = 0; p < NPE; p++) begin
        int cnt; cnt = 0;
        while (cnt < 5) begin
          int c; c = $urandom_range(0, (r % 2) ? 7 : L - 1);
          if (!sets[p][c]) begin sets[p][c] = 1; cnt++; end
        end
      end
      run(5, r[0], -1, $sformatf("random%0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
