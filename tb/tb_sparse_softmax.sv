// tb_sparse_softmax: rows of random Q8.8 scores are loaded; every probability
// is compared with an integer reference written here from the documented
// arithmetic, and separately with the real-valued softmax (tolerance 0.02).
// Checks the exponent-pass latency (count + 1 cycles from start to ready) and
// that the probabilities of a row sum to about 1.0.
module tb_sparse_softmax;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, clear = 0, s_valid = 0, start = 0, a_next = 0;
  logic signed [15:0] s_in;
  logic busy, ready;
  logic [15:0] a_out;
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0;

  sparse_softmax #(.N(N)) dut (.*);

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

  function automatic int ref_exp(input int s, input int m);
    int y, n, f, base;
    y = ((m - s) * 369) >>> 8;
    n = y >>> 8;
    f = (y >>> 4) & 15;
    base = int'($floor(32768.0 * (2.0 ** (-real'(f) / 16.0)) + 0.5));
    if (n >= 16) return 0;
    return base >>> n;
  endfunction

  initial begin
    int sc [N];
    s_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      int n, m, sum, r, lat, psum;
      real rsum;
      n = (round == 0) ? 1 : int'($urandom_range(2, N));
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int j = 0; j < n; j++) begin
        // spread of a few units (Q8.8), sometimes large
        sc[j] = (round % 3 == 0) ? int'($urandom_range(0, 4000)) - 2000 : int'($urandom_range(0, 800)) - 400;
        s_valid = 1; s_in = 16'(sc[j]); @(negedge clk);
      end
      s_valid = 0;
      check(int'(count) == n, "count");
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!ready && lat < 100) begin @(negedge clk); lat++; end
      check(lat - 1 == n + 1, $sformatf("latency %0d want %0d", lat - 1, n + 1));
      m = sc[0]; for (int j = 1; j < n; j++) if (sc[j] > m) m = sc[j];
      sum = 0; for (int j = 0; j < n; j++) sum += ref_exp(sc[j], m);
      r = (1 << 30) / sum;
      rsum = 0.0; for (int j = 0; j < n; j++) rsum += $exp(real'(sc[j] - m) / 256.0);
      psum = 0;
      for (int j = 0; j < n; j++) begin
        int want; real pr;
        want = (ref_exp(sc[j], m) * r) >>> 15;
        pr = $exp(real'(sc[j] - m) / 256.0) / rsum;
        check(int'(a_out) == want, $sformatf("round %0d a[%0d]=%0d want %0d", round, j, a_out, want));
        check((real'(a_out) / 32768.0 - pr) < 0.02 && (pr - real'(a_out) / 32768.0) < 0.02,
              $sformatf("round %0d a[%0d]=%0d far from real %f", round, j, a_out, pr));
        psum += int'(a_out);
        a_next = 1; @(negedge clk); a_next = 0;
      end
      check(psum > 32768 - 64 && psum <= 32768 + 8, $sformatf("row sum %0d", psum));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
