// tb_hp_pe: one PE processes rows of random data. Selected columns are handed
// to it in a random order (as the scheduler would); the Z row is compared with
// a reference computed here: scaled, saturated scores, the base-2 softmax of
// the documented arithmetic and the Q0.15 x Q8.8 accumulation. Also checks
// that SpMM requests V rows in exactly the SDDMM order.
module tb_hp_pe;
  localparam int DK = 4, TOPK = 4, L = 16, SS = 1, IW = $clog2(L);
  logic clk = 0, rst_n = 0, clear = 0, sddmm_valid = 0, sm_start = 0, spmm_valid = 0;
  logic [IW-1:0] sddmm_col, spmm_col;
  logic [DK-1:0][15:0] q_row, k_row, v_row, z_row;
  logic sm_ready;
  logic [$clog2(TOPK+1)-1:0] nsel;
  int checks = 0, failures = 0;
  int kq [L][DK], vv [L][DK];

  hp_pe #(.DK(DK), .TOPK(TOPK), .L(L), .SCALE_SHIFT(SS)) dut (.*);

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

  function automatic int clamp16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int e2(input int s, input int m);
    int y, n;
    y = ((m - s) * 369) >>> 8; n = y >>> 8;
    if (n >= 16) return 0;
    return int'($floor(32768.0 * (2.0 ** (-real'((y >>> 4) & 15) / 16.0)) + 0.5)) >>> n;
  endfunction

  initial begin
    int q [DK];
    q_row = '0; k_row = '0; v_row = '0; sddmm_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 25; round++) begin
      int cols [TOPK], s [TOPK], e [TOPK];
      int m, sum, r;
      longint zacc [DK];
      for (int j = 0; j < L; j++)
        for (int c = 0; c < DK; c++) begin
          kq[j][c] = int'($urandom_range(0, 1023)) - 512;
          vv[j][c] = int'($urandom_range(0, 2047)) - 1024;
        end
      for (int c = 0; c < DK; c++) begin q[c] = int'($urandom_range(0, 1023)) - 512; q_row[c] = 16'(q[c]); end
      // distinct random columns in random order
      for (int t = 0; t < TOPK; t++) begin
        bit fresh;
        do begin
          cols[t] = $urandom_range(0, L - 1);
          fresh = 1;
          for (int u = 0; u < t; u++) if (cols[u] == cols[t]) fresh = 0;
        end while (!fresh);
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int t = 0; t < TOPK; t++) begin
        longint acc; acc = 0;
        for (int c = 0; c < DK; c++) begin k_row[c] = 16'(kq[cols[t]][c]); acc += q[c] * kq[cols[t]][c]; end
        s[t] = clamp16(acc >>> (8 + SS));
        sddmm_valid = 1; sddmm_col = IW'(cols[t]); @(negedge clk);
      end
      sddmm_valid = 0;
      check(int'(nsel) == TOPK, "nsel");
      sm_start = 1; @(negedge clk); sm_start = 0;
      while (!sm_ready) @(negedge clk);
      m = s[0]; for (int t = 1; t < TOPK; t++) if (s[t] > m) m = s[t];
      sum = 0; for (int t = 0; t < TOPK; t++) begin e[t] = e2(s[t], m); sum += e[t]; end
      r = (1 << 30) / sum;
      for (int c = 0; c < DK; c++) zacc[c] = 0;
      for (int t = 0; t < TOPK; t++) begin
        int a; a = (e[t] * r) >>> 15;
        check(int'(spmm_col) == cols[t], $sformatf("spmm order t=%0d col %0d want %0d", t, spmm_col, cols[t]));
        for (int c = 0; c < DK; c++) begin v_row[c] = 16'(vv[spmm_col][c]); zacc[c] += longint'(a) * vv[cols[t]][c]; end
        spmm_valid = 1; @(negedge clk);
      end
      spmm_valid = 0;
      for (int c = 0; c < DK; c++)
        check(int'($signed(z_row[c])) == clamp16(zacc[c] >>> 15),
              $sformatf("round %0d z[%0d]=%0d want %0d", round, c, $signed(z_row[c]), clamp16(zacc[c] >>> 15)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
