// tb_dsa_text99: end-to-end test of the text-classification sizes at 99 %
// attention sparsity: L = 2000, D = 256, DK = 64, K = 64, INT4, TOPK = 20.
//
// Random X, W_Q/W_K/W_V, ternary P and INT4 W~_Q/W~_K are written through the
// host port; the whole attention is then run twice, once with compute
// reordering and once in plain left-to-right order. A reference model written
// here recomputes every stage with integers (projections, INT4 prediction,
// top-k with earliest-column tie break, scaled scores, base-2 softmax, SpMM)
// and every element of Z is compared in both runs. Also checked: the total
// cycle count against the documented schedule, that the sparse phases used
// exactly TOPK steps per row group, and that each mechanism occurred at least
// once: top-k dropping columns, PEs sharing a fetch, reordering saving
// fetches, both scheduling modes, and the prediction of the next row group
// running while the current one is in SDDMM/SpMM (prediction-bound here).
module tb_dsa_text99;
  import dsa_pkg::*;
  localparam int L = 2000, D = 256, DK = 64, K = 64, LP = 4, NPE = 4, TOPK = 20, SS = 3;
  localparam int NG = L / NPE;

  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done, reorder_en = 1;
  mem_sel_e wr_sel;
  logic [15:0] wr_row, wr_col, z_rd_row, z_rd_col;
  logic [15:0] wr_data, z_rd_data;
  logic [4:0] shift_xp, shift_qk;
  logic [31:0] stat_cycles, stat_k_fetch, stat_v_fetch, stat_shared;
  int checks = 0, failures = 0;

  dsa_accel #(.L(L), .D(D), .DK(DK), .K(K), .LP_BITS(LP), .NPE(NPE), .TOPK(TOPK),
              .SCALE_SHIFT(SS)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ data
  int x [L][D];
  int wm [3][D][DK];
  int pm [D][K];
  int wt [2][K][K];
  int qm [L][DK], km [L][DK], vm [L][DK];
  int qt [L][K], kt [L][K];
  int zref [L][DK];
  int dropped = 0;

  function automatic int sat(input longint v, input int sh, input int bits);
    longint s, hi;
    s = v >>> sh; hi = (longint'(1) << (bits - 1)) - 1;
    if (s > hi) return int'(hi);
    if (s < -hi - 1) return int'(-hi - 1);
    return int'(s);
  endfunction

  function automatic int e2(input int s, input int m);
    int y, n;
    y = ((m - s) * 369) >>> 8; n = y >>> 8;
    if (n >= 16) return 0;
    return int'($floor(32768.0 * (2.0 ** (-real'((y >>> 4) & 15) / 16.0)) + 0.5)) >>> n;
  endfunction

  task automatic wr(input mem_sel_e sel, input int r, input int c, input int val);
    wr_en = 1; wr_sel = sel; wr_row = 16'(r); wr_col = 16'(c); wr_data = 16'(val);
    @(negedge clk);
  endtask

  task automatic reference();
    for (int i = 0; i < L; i++) begin
      int xq [K];
      for (int c = 0; c < DK; c++) begin
        longint a [3];
        a = '{0, 0, 0};
        for (int d = 0; d < D; d++) for (int m = 0; m < 3; m++) a[m] += longint'(x[i][d]) * wm[m][d][c];
        qm[i][c] = sat(a[0], 8, 16); km[i][c] = sat(a[1], 8, 16); vm[i][c] = sat(a[2], 8, 16);
      end
      for (int c = 0; c < K; c++) begin
        longint a; a = 0;
        for (int d = 0; d < D; d++) a += pm[d][c] * x[i][d];
        xq[c] = sat(a, int'(shift_xp), LP);
      end
      for (int c = 0; c < K; c++) begin
        longint a, b; a = 0; b = 0;
        for (int m = 0; m < K; m++) begin a += xq[m] * wt[0][m][c]; b += xq[m] * wt[1][m][c]; end
        qt[i][c] = sat(a, int'(shift_qk), LP); kt[i][c] = sat(b, int'(shift_qk), LP);
      end
    end
    for (int i = 0; i < L; i++) begin
      int st [L];
      bit used [L];
      int sel [TOPK], s [TOPK], e [TOPK];
      int m, sum, r;
      longint z [DK];
      for (int j = 0; j < L; j++) begin
        st[j] = 0; used[j] = 0;
        for (int c = 0; c < K; c++) st[j] += qt[i][c] * kt[j][c];
      end
      for (int t = 0; t < TOPK; t++) begin
        int best; best = -1;
        for (int j = 0; j < L; j++) if (!used[j] && (best < 0 || st[j] > st[best])) best = j;
        used[best] = 1; sel[t] = best;
      end
      for (int t = 0; t < TOPK; t++) begin
        longint a; a = 0;
        for (int c = 0; c < DK; c++) a += longint'(qm[i][c]) * km[sel[t]][c];
        s[t] = sat(a, 8 + SS, 16);
      end
      m = s[0]; for (int t = 1; t < TOPK; t++) if (s[t] > m) m = s[t];
      sum = 0; for (int t = 0; t < TOPK; t++) begin e[t] = e2(s[t], m); sum += e[t]; end
      r = (1 << 30) / sum;
      for (int c = 0; c < DK; c++) z[c] = 0;
      for (int t = 0; t < TOPK; t++)
        for (int c = 0; c < DK; c++) z[c] += longint'((e[t] * r) >>> 15) * vm[sel[t]][c];
      for (int c = 0; c < DK; c++) zref[i][c] = sat(z[c], 15, 16);
      dropped += L - TOPK;
    end
  endtask

  // cycles of one run: PROJ rows, then per row group PRED..WB
  localparam int A_CYC = 3 * TOPK + 5;
  localparam int W_CYC = (L + 2 - A_CYC > 1) ? L + 2 - A_CYC : 1;
  localparam int EXP_CYCLES = L * (2 * K + 3) + (L + 3) + TOPK + (NG - 1) * (A_CYC + W_CYC + TOPK) + A_CYC;

  int k_fetch [2], shared_steps [2];
  int overlap_cycles = 0;

  // pipeline coverage: prediction of the next group running during SDDMM/SpMM
  always @(posedge clk)
    if (dut.u_lp_array.busy && (dut.pe_spmm || dut.sc_step)) overlap_cycles++;

  task automatic run(input bit reo);
    int lat;
    reorder_en = reo;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    lat = 1;
    while (!done && lat < 19000000) begin @(negedge clk); lat++; end
    check(done, "run finished");
    check(int'(stat_cycles) == EXP_CYCLES,
          $sformatf("cycles %0d want %0d (reorder %0d)", stat_cycles, EXP_CYCLES, reo));
    k_fetch[reo] = int'(stat_k_fetch);
    shared_steps[reo] = int'(stat_shared);
    check(stat_k_fetch == stat_v_fetch, "K and V fetch counts agree (same order)");
    check(int'(stat_k_fetch) <= NG * TOPK * NPE && int'(stat_k_fetch) >= NG * TOPK, "fetch range");
    for (int i = 0; i < L; i++)
      for (int c = 0; c < DK; c++) begin
        z_rd_row = 16'(i); z_rd_col = 16'(c);
        #1;
        check(int'($signed(z_rd_data)) == zref[i][c],
              $sformatf("reorder %0d Z[%0d][%0d]=%0d want %0d", reo, i, c, $signed(z_rd_data), zref[i][c]));
      end
    $display("run reorder=%0d: cycles %0d, K fetches %0d, V fetches %0d, shared steps %0d",
             reo, stat_cycles, stat_k_fetch, stat_v_fetch, stat_shared);
  endtask

  initial begin
    wr_sel = MEM_X; wr_row = 0; wr_col = 0; wr_data = 0; z_rd_row = 0; z_rd_col = 0;
    shift_xp = 5'd9; shift_qk = 5'd6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // a few "global" tokens with large features create column locality
    for (int i = 0; i < L; i++)
      for (int d = 0; d < D; d++) begin
        x[i][d] = int'($urandom_range(0, 511)) - 256;
        if (i % 7 == 3) x[i][d] = x[i][d] * 3;
        wr(MEM_X, i, d, x[i][d]);
      end
    for (int m = 0; m < 3; m++)
      for (int d = 0; d < D; d++)
        for (int c = 0; c < DK; c++) begin
          wm[m][d][c] = int'($urandom_range(0, 255)) - 128;
          wr(m == 0 ? MEM_WQ : m == 1 ? MEM_WK : MEM_WV, d, c, wm[m][d][c]);
        end
    for (int d = 0; d < D; d++)
      for (int c = 0; c < K; c++) begin
        int r; r = $urandom_range(0, 5);
        pm[d][c] = (r == 0) ? 1 : (r == 1) ? -1 : 0;
        wr(MEM_P, d, c, pm[d][c] == 1 ? 1 : pm[d][c] == -1 ? 3 : 0);
      end
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < K; a++)
        for (int c = 0; c < K; c++) begin
          wt[m][a][c] = int'($urandom_range(0, (1 << LP) - 1)) - (1 << (LP - 1));
          wr(m == 0 ? MEM_WQT : MEM_WKT, a, c, wt[m][a][c]);
        end
    wr_en = 0;
    reference();
    run(1);
    run(0);
    // mechanism coverage
    $display("mechanisms: dropped columns %0d, shared steps %0d, K fetches reordered %0d vs in-order %0d",
             dropped, shared_steps[1], k_fetch[1], k_fetch[0]);
    $display("mechanisms: prediction overlapped with attention %0d cycles", overlap_cycles);
    check(dropped > 0, "top-k mask dropped columns");
    check(overlap_cycles > 0, "prediction overlapped with attention");
    check(shared_steps[1] > 0, "PEs shared a fetch with reordering");
    check(k_fetch[1] < k_fetch[0], "reordering reduced fetches");
    check(shared_steps[0] >= 0 && k_fetch[0] > 0, "in-order mode ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
