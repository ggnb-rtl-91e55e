// tb_pagerank_engine -- self-checking test of pagerank_engine.
//
// The testbench plays the graph builder's read ports from its own arrays and
// compares every PageRank value with a double-precision reference computed
// here (damped PageRank, d = 0.85, dangling rank spread uniformly, iterated to
// convergence).  Graphs: the four-vertex ring and the four-vertex DoS example
// whose values 0.25 and 0.45/0.13/0.24/0.17 are printed for them, a single
// vertex with a self-loop, a graph with isolated dangling vertices, and random
// graphs.  It also checks convergence and the cycle budget of a run.
// The two four-vertex examples and their values come from the method; the
// damping, the tolerance of 2e-5 on random graphs and the budget are checks
// of this design's own choices.
module tb_pagerank_engine;
  import ggnb_pkg::*;

  localparam int MAXN = 64;
  localparam int MAXE = 160;
  localparam int NA_W = $clog2(MAXN);
  localparam int EA_W = $clog2(MAXE);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start = 0;
  logic [CNT_W-1:0] n_nodes = 0, n_edges = 0;
  logic [NA_W-1:0]  nb_addr, pr_addr = 0;
  logic [CNT_W-1:0] nb_out_deg;
  logic [EA_W-1:0]  e_addr;
  logic [NA_W-1:0]  e_src, e_dst;
  logic [PR_W-1:0]  pr_data;
  logic             busy, done, converged;
  logic [15:0]      iterations;

  int odeg [MAXN];
  int src  [MAXE];
  int dst  [MAXE];
  real ref_pr [MAXN];

  assign nb_out_deg = CNT_W'(odeg[nb_addr]);
  assign e_src      = NA_W'(src[e_addr]);
  assign e_dst      = NA_W'(dst[e_addr]);

  pagerank_engine #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .MAX_ITER(100)) dut (
    .clk, .rst_n, .start, .n_nodes, .n_edges,
    .nb_addr, .nb_out_deg, .e_addr, .e_src, .e_dst,
    .pr_addr, .pr_data, .busy, .done, .iterations, .converged
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n, e;

  task automatic clear_graph();
    for (int i = 0; i < MAXN; i++) odeg[i] = 0;
    for (int i = 0; i < MAXE; i++) begin src[i] = 0; dst[i] = 0; end
    e = 0;
  endtask

  task automatic add_edge(input int u, input int v);
    src[e] = u; dst[e] = v; odeg[u]++; e++;
  endtask

  // double-precision reference
  task automatic reference();
    real nxt [MAXN];
    real dang, diff;
    for (int i = 0; i < n; i++) ref_pr[i] = 1.0 / n;
    for (int it = 0; it < 1000; it++) begin
      dang = 0.0;
      for (int i = 0; i < n; i++) begin
        nxt[i] = 0.0;
        if (odeg[i] == 0) dang += ref_pr[i];
      end
      for (int k = 0; k < e; k++) nxt[dst[k]] += ref_pr[src[k]] / odeg[src[k]];
      diff = 0.0;
      for (int i = 0; i < n; i++) begin
        nxt[i] = 0.15 / n + 0.85 * (nxt[i] + dang / n);
        diff += (nxt[i] > ref_pr[i]) ? nxt[i] - ref_pr[i] : ref_pr[i] - nxt[i];
        ref_pr[i] = nxt[i];
      end
      if (diff < 1e-13) break;
    end
  endtask

  function automatic real hw_pr(input int i);
    return real'(dut.pr[i]) / real'(1 << PR_FRAC);
  endfunction

  int cycles;
  task automatic run(input string name);
    real err, worst;
    reference();
    n_nodes = CNT_W'(n);
    n_edges = CNT_W'(e);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    worst = 0.0;
    for (int i = 0; i < n; i++) begin
      pr_addr = NA_W'(i);
      #1;
      err = real'(pr_data) / real'(1 << PR_FRAC) - ref_pr[i];
      if (err < 0) err = -err;
      if (err > worst) worst = err;
    end
    check(worst < 2.0e-5, $sformatf("%s: max |PR - reference| = %g", name, worst));
    check(converged, $sformatf("%s: did not converge in %0d iterations", name, iterations));
    // budget: set-up <= 36 cycles per vertex + 40, each iteration 2n+e+1 cycles
    check(cycles <= 36 * n + 40 + int'(iterations) * (2 * n + e + 1) + 4,
          $sformatf("%s: %0d cycles for %0d iterations", name, cycles, iterations));
    check(cycles >= int'(iterations) * (2 * n + e + 1),
          $sformatf("%s: %0d cycles is below one pass per iteration", name, cycles));
    $display("%s: n=%0d e=%0d iterations=%0d cycles=%0d max err=%g",
             name, n, e, iterations, cycles, worst);
  endtask

  function automatic int round2(input real v);   // value in hundredths
    return int'(v * 100.0);   // int' of a real rounds to nearest
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Four-vertex ring 0316 -> 02b0 -> 018f -> 04b1 -> 0316: 0.25 each.
    clear_graph(); n = 4;
    add_edge(0, 1); add_edge(1, 2); add_edge(2, 3); add_edge(3, 0);
    run("ring");
    for (int i = 0; i < 4; i++) check(round2(hw_pr(i)) == 25, $sformatf("ring PR[%0d]=%f", i, hw_pr(i)));

    // DoS example: 0=0000 1=04b1 2=018f 3=0316
    clear_graph(); n = 4;
    add_edge(1, 0); add_edge(1, 2); add_edge(1, 3);
    add_edge(2, 0); add_edge(3, 0); add_edge(3, 2);
    run("dos_example");
    check(round2(hw_pr(0)) == 45, $sformatf("PR(0000)=%f, printed .45", hw_pr(0)));
    check(round2(hw_pr(1)) == 13, $sformatf("PR(04b1)=%f, printed .13", hw_pr(1)));
    check(round2(hw_pr(2)) == 24, $sformatf("PR(018f)=%f, printed .24", hw_pr(2)));
    check(round2(hw_pr(3)) == 17, $sformatf("PR(0316)=%f, printed .17", hw_pr(3)));

    // single vertex with a self-loop: PR = 1
    clear_graph(); n = 1;
    add_edge(0, 0);
    run("self_loop");
    check(dut.pr[0] == PR_W'(1 << PR_FRAC), "single vertex PR is not 1.0");

    // isolated vertices only (no edges)
    clear_graph(); n = 5;
    run("no_edges");

    // random graphs
    for (int t = 0; t < 12; t++) begin
      clear_graph();
      n = 2 + int'($urandom_range(MAXN - 2));
      for (int k = 0; k < MAXE && k < 3 * n; k++) begin
        int u, v;
        bit dup;
        u = int'($urandom_range(n - 1));
        v = int'($urandom_range(n - 1));
        dup = 0;
        for (int q = 0; q < e; q++) if (src[q] == u && dst[q] == v) dup = 1;
        if (!dup) add_edge(u, v);
      end
      run($sformatf("random%0d", t));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
