// tb_linear_unit: random weights and token rows; every Q, K, V column is
// compared with (sum x*w) >> 8 saturated to 16 bits, computed here. Issues
// one column per cycle and checks the one-cycle latency and out_col.
module tb_linear_unit;
  localparam int D = 8, DK = 4;
  logic clk = 0, rst_n = 0, wr_en = 0, in_valid = 0;
  logic [1:0] wr_mat;
  logic [$clog2(D)-1:0] wr_row;
  logic [$clog2(DK)-1:0] wr_col, col, out_col;
  logic signed [15:0] wr_data, q, k, v;
  logic [D-1:0][15:0] x_row;
  logic out_valid;
  int checks = 0, failures = 0;
  int w [3][D][DK];
  int x [D];

  linear_unit #(.D(D), .DK(DK)) dut (.*);

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

  function automatic int expect_val(input int m, input int c);
    longint acc; acc = 0;
    for (int d = 0; d < D; d++) acc += longint'(x[d]) * longint'(w[m][d][c]);
    acc = acc >>> 8;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  initial begin
    wr_mat = 0; wr_row = 0; wr_col = 0; wr_data = 0; col = 0; x_row = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      // weights: small in even rounds, large (saturating) in odd rounds
      for (int m = 0; m < 3; m++)
        for (int d = 0; d < D; d++)
          for (int c = 0; c < DK; c++) begin
            w[m][d][c] = (round % 2) ? int'($urandom_range(0, 65535)) - 32768 : int'($urandom_range(0, 1023)) - 512;
            @(negedge clk);
            wr_en = 1; wr_mat = 2'(m); wr_row = 3'(d); wr_col = 2'(c); wr_data = 16'(w[m][d][c]);
          end
      @(negedge clk); wr_en = 0;
      for (int d = 0; d < D; d++) begin
        x[d] = int'($urandom_range(0, 4095)) - 2048;
        x_row[d] = 16'(x[d]);
      end
      for (int c = 0; c < DK; c++) begin
        in_valid = 1; col = 2'(c);
        @(negedge clk);
        check(out_valid && int'(out_col) == c, "one-cycle latency / out_col");
        check(int'(q) == expect_val(0, c), $sformatf("q col %0d = %0d want %0d", c, q, expect_val(0, c)));
        check(int'(k) == expect_val(1, c), $sformatf("k col %0d", c));
        check(int'(v) == expect_val(2, c), $sformatf("v col %0d", c));
      end
      in_valid = 0;
      @(negedge clk);
      check(!out_valid, "out_valid drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
