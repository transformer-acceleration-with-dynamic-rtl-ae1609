// tb_pred_proj: random ternary projections, INT4 approximation weights and
// token rows; q~ and k~ are compared with a reference computed here
// (xq = sat4((x P) >>> shift_xp), q~ = sat4((xq W~_Q) >>> shift_qk)).
// Checks done arrives 2K cycles after start and that busy covers the run.
module tb_pred_proj;
  localparam int D = 16, K = 8, LP = 4;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, busy, done;
  logic [1:0] wr_mat;
  logic [$clog2(D)-1:0] wr_row;
  logic [$clog2(K)-1:0] wr_col;
  logic [LP-1:0] wr_data;
  logic [4:0] shift_xp, shift_qk;
  logic [D-1:0][15:0] x_row;
  logic [K-1:0][LP-1:0] qt_row, kt_row;
  int checks = 0, failures = 0;
  int p [D][K], wq [K][K], wk [K][K], x [D];

  pred_proj #(.D(D), .K(K), .LP_BITS(LP)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int sat(input longint v, input int sh, input int bits);
    longint s, hi;
    s = v >>> sh; hi = (longint'(1) << (bits - 1)) - 1;
    if (s > hi) return int'(hi);
    if (s < -hi - 1) return int'(-hi - 1);
    return int'(s);
  endfunction

  task automatic wr(input int m, input int r, input int c, input int val);
    @(negedge clk);
    wr_en = 1; wr_mat = 2'(m); wr_row = 4'(r); wr_col = 3'(c); wr_data = 4'(val);
  endtask

  initial begin
    wr_mat = 0; wr_row = 0; wr_col = 0; wr_data = 0; x_row = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int xq [K];
      int lat;
      shift_xp = 5'(round % 3 + 7);
      shift_qk = 5'(round % 2 + 2);
      for (int d = 0; d < D; d++)
        for (int c = 0; c < K; c++) begin
          int r; r = $urandom_range(0, 5);          // 1/3 non-zero on average
          p[d][c] = (r == 0) ? 1 : (r == 1) ? -1 : 0;
          wr(0, d, c, (p[d][c] == 1) ? 1 : (p[d][c] == -1) ? 3 : 0);
        end
      for (int a = 0; a < K; a++)
        for (int c = 0; c < K; c++) begin
          wq[a][c] = int'($urandom_range(0, 15)) - 8; wr(1, a, c, wq[a][c]);
          wk[a][c] = int'($urandom_range(0, 15)) - 8; wr(2, a, c, wk[a][c]);
        end
      @(negedge clk); wr_en = 0;
      for (int d = 0; d < D; d++) begin
        x[d] = int'($urandom_range(0, 8191)) - 4096; x_row[d] = 16'(x[d]);
      end
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 100) begin
        check(busy || lat == 1, "busy while running");
        @(negedge clk); lat++;
      end
      check(lat - 1 == 2 * K, $sformatf("done after %0d cycles want %0d", lat - 1, 2 * K));
      for (int c = 0; c < K; c++) begin
        longint acc; acc = 0;
        for (int d = 0; d < D; d++) acc += p[d][c] * x[d];
        xq[c] = sat(acc, int'(shift_xp), LP);
      end
      for (int c = 0; c < K; c++) begin
        longint aq, ak; aq = 0; ak = 0;
        for (int a = 0; a < K; a++) begin aq += xq[a] * wq[a][c]; ak += xq[a] * wk[a][c]; end
        check(int'($signed(qt_row[c])) == sat(aq, int'(shift_qk), LP),
              $sformatf("round %0d q~[%0d]=%0d want %0d", round, c, $signed(qt_row[c]), sat(aq, int'(shift_qk), LP)));
        check(int'($signed(kt_row[c])) == sat(ak, int'(shift_qk), LP), $sformatf("round %0d k~[%0d]", round, c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
