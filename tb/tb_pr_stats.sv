// tb_pr_stats -- self-checking test of pr_stats.
//
// Random PageRank-like value tables, with and without ties, of odd and even
// length (and the empty and one-element cases) are served through the read
// port.  Minimum, maximum and median (mean of the two middle values for an
// even count, truncated) are compared with a sort done here, and the run time
// is checked against the n + n*(n+2) + 3 cycle bound.
// Minimum, median and maximum are the method's features; the even-count
// median rule and the cycle bound are this design's.
module tb_pr_stats;
  import ggnb_pkg::*;

  localparam int MAXN = 64;
  localparam int NA_W = $clog2(MAXN);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start = 0, busy, done;
  logic [CNT_W-1:0] n_nodes = 0;
  logic [NA_W-1:0]  pr_addr;
  logic [PR_W-1:0]  pr_data;
  pr_features_t     stats;

  int vals [MAXN];
  assign pr_data = PR_W'(vals[pr_addr]);

  pr_stats #(.MAX_NODES(MAXN)) dut (
    .clk, .rst_n, .start, .n_nodes, .pr_addr, .pr_data, .busy, .done, .stats
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, cycles, emin, emax, emed;
    int s [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      n = (t == 0) ? 0 : (t == 1) ? 1 : (t == 2) ? 2 : int'($urandom_range(1, MAXN));
      s.delete();
      for (int q = 0; q < MAXN; q++) begin
        vals[q] = (t % 2 == 0) ? int'($urandom_range(0, 7)) * 100000
                               : int'($urandom_range(0, 1 << 24));
        if (q < n) s.push_back(vals[q]);
      end
      s.sort();
      if (n == 0) begin emin = 0; emax = 0; emed = 0; end
      else begin
        emin = s[0]; emax = s[n - 1];
        emed = (s[(n - 1) / 2] + s[n / 2]) / 2;
      end
      n_nodes = CNT_W'(n);
      start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      check(stats.min_pr == PR_W'(emin), $sformatf("t%0d n=%0d min %0d vs %0d", t, n, stats.min_pr, emin));
      check(stats.max_pr == PR_W'(emax), $sformatf("t%0d n=%0d max %0d vs %0d", t, n, stats.max_pr, emax));
      check(stats.med_pr == PR_W'(emed), $sformatf("t%0d n=%0d median %0d vs %0d", t, n, stats.med_pr, emed));
      check(cycles <= n + n * (n + 2) + 3, $sformatf("t%0d took %0d cycles for n=%0d", t, cycles, n));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
