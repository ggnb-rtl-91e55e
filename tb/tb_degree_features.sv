// tb_degree_features -- self-checking test of degree_features.
//
// Random degree tables (including an empty graph and a single vertex) are
// served through the read port; the node/edge counts and the maximum and
// minimum in- and out-degree are compared with values computed here, and the
// run time is checked to be n + 2 cycles from start to done.
// The four degree features are defined by the method; the empty-graph
// convention (all zeros) is this design's choice and is checked here.
module tb_degree_features;
  import ggnb_pkg::*;

  localparam int MAXN = 64;
  localparam int NA_W = $clog2(MAXN);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start = 0, busy, done;
  logic [CNT_W-1:0] n_nodes = 0, n_edges = 0;
  logic [NA_W-1:0]  na_addr;
  logic [CNT_W-1:0] na_in_deg, na_out_deg;
  degree_features_t feat;

  int in_d [MAXN];
  int out_d [MAXN];
  assign na_in_deg  = CNT_W'(in_d[na_addr]);
  assign na_out_deg = CNT_W'(out_d[na_addr]);

  degree_features #(.MAX_NODES(MAXN)) dut (
    .clk, .rst_n, .start, .n_nodes, .n_edges,
    .na_addr, .na_in_deg, .na_out_deg, .busy, .done, .feat
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, e, mxi, mxo, mni, mno, cycles;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      n = (t == 0) ? 0 : (t == 1) ? 1 : int'($urandom_range(1, MAXN));
      e = int'($urandom_range(0, 300));
      mxi = 0; mxo = 0; mni = 1 << 30; mno = 1 << 30;
      for (int q = 0; q < MAXN; q++) begin
        in_d[q]  = int'($urandom_range(0, (t % 3 == 0) ? 3 : 200));
        out_d[q] = int'($urandom_range(0, (t % 3 == 0) ? 3 : 200));
        if (q < n) begin
          if (in_d[q] > mxi) mxi = in_d[q];
          if (out_d[q] > mxo) mxo = out_d[q];
          if (in_d[q] < mni) mni = in_d[q];
          if (out_d[q] < mno) mno = out_d[q];
        end
      end
      if (n == 0) begin mni = 0; mno = 0; end
      n_nodes = CNT_W'(n); n_edges = CNT_W'(e);
      start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      check(feat.nodes == CNT_W'(n) && feat.edges == CNT_W'(e), $sformatf("t%0d counts", t));
      check(feat.max_in == CNT_W'(mxi), $sformatf("t%0d max_in %0d vs %0d", t, feat.max_in, mxi));
      check(feat.max_out == CNT_W'(mxo), $sformatf("t%0d max_out %0d vs %0d", t, feat.max_out, mxo));
      check(feat.min_in == CNT_W'(mni), $sformatf("t%0d min_in %0d vs %0d", t, feat.min_in, mni));
      check(feat.min_out == CNT_W'(mno), $sformatf("t%0d min_out %0d vs %0d", t, feat.min_out, mno));
      check(cycles == ((n == 0) ? 2 : n + 2), $sformatf("t%0d took %0d cycles for n=%0d", t, cycles, n));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
