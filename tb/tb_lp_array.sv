// tb_lp_array: random INT4 approximate query rows and an approximate key
// buffer modelled here (same-cycle read). For every lane the TOPK kept columns
// are compared, in rank order, with a stable descending selection of the
// scores q~_i . k~_j computed here. Checks done comes L + 1 cycles after start.
module tb_lp_array;
  localparam int L = 32, K = 8, LP = 4, NPE = 2, TOPK = 4, IW = $clog2(L);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [NPE-1:0][K-1:0][LP-1:0] qt_rows;
  logic [IW-1:0] kt_raddr;
  logic [K-1:0][LP-1:0] kt_rdata;
  logic [IW-1:0] idx_list [NPE][TOPK];
  logic [K-1:0][LP-1:0] kt_mem [L];
  int checks = 0, failures = 0;

  lp_array #(.L(L), .K(K), .LP_BITS(LP), .NPE(NPE), .TOPK(TOPK)) dut (.*);
  assign kt_rdata = kt_mem[kt_raddr];

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
    qt_rows = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 15; round++) begin
      int sc [L];
      bit used [L];
      int lat;
      for (int j = 0; j < L; j++)
        for (int m = 0; m < K; m++)
          kt_mem[j][m] = 4'((round % 2) ? $urandom_range(0, 3) : $urandom_range(0, 15));
      for (int p = 0; p < NPE; p++)
        for (int m = 0; m < K; m++) qt_rows[p][m] = 4'($urandom_range(0, 15));
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 200) begin @(negedge clk); lat++; end
      check(lat - 1 == L + 1, $sformatf("done after %0d want %0d", lat - 1, L + 1));
      for (int p = 0; p < NPE; p++) begin
        for (int j = 0; j < L; j++) begin
          sc[j] = 0; used[j] = 0;
          for (int m = 0; m < K; m++) sc[j] += $signed(qt_rows[p][m]) * $signed(kt_mem[j][m]);
        end
        for (int k = 0; k < TOPK; k++) begin
          int best; best = -1;
          for (int j = 0; j < L; j++) if (!used[j] && (best < 0 || sc[j] > sc[best])) best = j;
          used[best] = 1;
          check(int'(idx_list[p][k]) == best,
                $sformatf("round %0d lane %0d rank %0d: col %0d want %0d", round, p, k, idx_list[p][k], best));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
