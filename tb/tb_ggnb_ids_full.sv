// tb_ggnb_ids_full -- the GGNB detector at its default sizes, end to end.
//
// The detector is instantiated with no parameter overrides: 512 vertices, 512
// edges, 23 ms windows at 100 MHz (2.3 M cycles), 11-bit IDs.  Traffic is
// paced like a 1 Mbit/s CAN bus: one frame every 110 to 200 us in normal
// windows, and back-to-back minimum-length frames (one every 47 us) in a
// fuzzing window, the worst case for the vertex table and the analysis time.
// As in the reduced test, the testbench trains a Gaussian naive Bayes model
// offline, loads it, and checks every window's features, scores and verdict
// against the double-precision reference; the last two windows use the
// four-feature model.  At these rates nothing may be lost: no dropped
// message, no lost edge and no stretched window.
// The default sizes follow the method's 23 ms window at 1 Mbit/s; the
// traffic and the bus pacing are this testbench's own.
module tb_ggnb_ids_full;
  import ggnb_pkg::*;
  import ggnb_ref_pkg::*;

  localparam int MAXN = 512;
  localparam int MAXE = 512;
  localparam int WIN  = 2_300_000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              id_valid = 0, id_ready;
  logic [10:0]       id = 0;
  logic              mw_en = 0;
  model_sel_e        mw_sel = MW_MEAN;
  logic              mw_class = 0;
  logic [3:0]        mw_feat = 0;
  logic [63:0]       mw_data = 0;
  logic [N_FEAT-1:0] feature_mask = MASK_ALL;
  logic              result_valid, attacked, pr_converged;
  graph_features_t   features;
  logic signed [SCORE_W-1:0] score_free, score_att;
  logic [15:0]       pr_iterations;
  logic [31:0]       windows, dropped, edges_lost, overrun;

  ggnb_ids dut (
    .clk, .rst_n, .id_valid, .id_ready, .id,
    .mw_en, .mw_sel, .mw_class, .mw_feat, .mw_data, .feature_mask,
    .result_valid, .attacked, .features, .score_free, .score_att,
    .pr_iterations, .pr_converged, .windows, .dropped, .edges_lost, .overrun
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  gnb_model model = new();
  traffic   gen   = new(24);

  task automatic write_word(input model_sel_e sel, input int c, input int f, input longint d);
    @(negedge clk);
    mw_en = 1; mw_sel = sel; mw_class = c[0]; mw_feat = 4'(f); mw_data = 64'(d);
    @(negedge clk);
    mw_en = 0;
  endtask

  task automatic load_model(input logic [N_FEAT-1:0] mask);
    for (int c = 0; c < 2; c++) begin
      for (int f = 0; f < N_FEAT; f++) begin
        write_word(MW_MEAN, c, f, model.q_mean[c][f]);
        write_word(MW_WEIGHT, c, f, model.q_wgt[c][f]);
      end
      write_word(MW_CONST, c, 0, model.q_const(c, mask));
    end
    feature_mask = mask;
  endtask

  // ---- window bookkeeping: messages accepted per window ----
  typedef struct { int ids [$]; bit attack; } window_t;
  window_t cur;
  window_t closed_q [$];
  logic [N_FEAT-1:0] mask_q [$];
  int n_closed = 0;
  bit cur_injected;

  always @(posedge clk) if (rst_n) begin
    if (dut.win_closed) begin
      closed_q.push_back(cur);
      cur.ids.delete();
      cur.attack = 0;
      n_closed++;
    end
    if (id_valid && id_ready) begin
      cur.ids.push_back(int'(id));
      if (cur_injected) cur.attack = 1;
    end
  end

  // ---- mechanism counters ----
  int c_results = 0, c_att = 0, c_free = 0, c_self = 0, c_dang = 0, c_odd = 0, c_even = 0;
  int c_reduced = 0, c_correct = 0, c_labelled = 0, c_nonconv = 0;

  // ---- result checker ----
  always @(posedge clk) if (rst_n && result_valid) begin
    window_t w;
    ref_result_t r;
    real hs0, hs1, rs0, rs1, tol, d;
    real hpr [3];
    logic [N_FEAT-1:0] m;
    if (closed_q.size() == 0) begin
      check(0, "result without a closed window");
    end else begin
      w = closed_q.pop_front();
      m = feature_mask;
      r = window_features(w.ids, MAXN, MAXE);
      c_results++;
      check(int'(features.nodes) == r.n, $sformatf("result %0d nodes %0d vs %0d", c_results, features.nodes, r.n));
      check(int'(features.edges) == r.e, $sformatf("result %0d edges %0d vs %0d", c_results, features.edges, r.e));
      check(real'(features.max_in) == r.f[F_MAX_IN] && real'(features.max_out) == r.f[F_MAX_OUT] &&
            real'(features.min_in) == r.f[F_MIN_IN] && real'(features.min_out) == r.f[F_MIN_OUT],
            $sformatf("result %0d degree extremes", c_results));
      hpr[0] = real'(features.med_pr) / real'(1 << PR_FRAC);
      hpr[1] = real'(features.max_pr) / real'(1 << PR_FRAC);
      hpr[2] = real'(features.min_pr) / real'(1 << PR_FRAC);
      for (int k = 0; k < 3; k++) begin
        d = hpr[k] - r.f[int'(F_MED_PR) + k];
        if (d < 0) d = -d;
        check(d < 5e-5, $sformatf("result %0d PageRank feature %0d: %g vs %g", c_results, k, hpr[k], r.f[int'(F_MED_PR) + k]));
      end
      check(pr_iterations <= 16'd100 && pr_iterations > 0, "PageRank iteration count out of range");
      if (!pr_converged) c_nonconv++;
      // scores: reference model on reference features
      hs0 = real'(score_free) / real'(1 << SCORE_FRAC);
      hs1 = real'(score_att) / real'(1 << SCORE_FRAC);
      rs0 = model.score(r.f, 0, m);
      rs1 = model.score(r.f, 1, m);
      tol = 0.5 + 1e-3 * (((rs0 < 0) ? -rs0 : rs0) + ((rs1 < 0) ? -rs1 : rs1));
      d = (hs0 - rs0); if (d < 0) d = -d;
      check(d <= tol, $sformatf("result %0d free score %f vs %f", c_results, hs0, rs0));
      d = (hs1 - rs1); if (d < 0) d = -d;
      check(d <= tol, $sformatf("result %0d attack score %f vs %f", c_results, hs1, rs1));
      d = rs1 - rs0;
      if (d > 2.0 * tol || d < -2.0 * tol)
        check(attacked == (d > 0), $sformatf("result %0d verdict %0d vs reference %f", c_results, attacked, d));
      if (attacked) c_att++; else c_free++;
      if (r.selfloops > 0) c_self++;
      if (r.dangling > 0) c_dang++;
      if (r.n % 2 == 1) c_odd++; else c_even++;
      if (m == MASK_REDUCED) c_reduced++;
      c_labelled++;
      if (attacked == w.attack) c_correct++;
      $display("window %0d: %s n=%0d e=%0d maxin=%0d maxout=%0d maxPR=%f it=%0d -> %s (free %f att %f)",
               c_results, w.attack ? "attack" : "normal", r.n, r.e, features.max_in, features.max_out,
               hpr[1], pr_iterations, attacked ? "ATTACKED" : "free", hs0, hs1);
    end
  end

  // mode of the traffic per window index: normal, DoS, normal, fuzzing at
  // full bus rate, normal, DoS
  function automatic int mode_of(input int k);
    case (k)
      1, 5:    return 1;
      3:       return 2;
      default: return 0;
    endcase
  endfunction

  // 100 MHz clock: 100 cycles per microsecond
  int gap_lo = 11_000, gap_hi = 20_000;
  int max_latency = 0;
  int t_closed = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.win_closed) t_closed = cyc;
    if (result_valid && cyc - t_closed > max_latency) max_latency = cyc - t_closed;
  end

  initial begin
    ref_result_t r;
    int ids [$];
    bit inj;
    cur.attack = 0;

    // offline training on generated windows (the host's job)
    for (int t = 0; t < 60; t++) begin
      ids.delete();
      gen.mode = (t % 2 == 0) ? 0 : ((t % 4 == 1) ? 1 : 2);
      for (int k = 0; k < 150; k++) ids.push_back(gen.next(inj));
      r = window_features(ids, MAXN, MAXE);
      model.add(r.f, (gen.mode != 0) ? 1 : 0);
    end
    model.fit();

    repeat (3) @(negedge clk);
    rst_n = 1;
    load_model(MASK_ALL);

    while (c_results < 6) begin
      gen.mode = mode_of(n_closed);
      if (n_closed == 3) begin gap_lo = 4_700; gap_hi = 4_700; end
      else begin gap_lo = 11_000; gap_hi = 20_000; end
      id = 11'(gen.next(inj));
      cur_injected = inj;
      id_valid = 1;
      forever begin
        if (id_ready) begin @(negedge clk); break; end
        @(negedge clk);
      end
      id_valid = 0;
      repeat ($urandom_range(gap_lo, gap_hi)) @(negedge clk);
      if (c_results == 4 && feature_mask == MASK_ALL) load_model(MASK_REDUCED);
    end

    check(windows == 32'(c_results), "window counter");
    check(c_att > 0, "no window was judged attacked");
    check(c_free > 0, "no window was judged attack free");
    check(c_self > 0, "no self-loop occurred");
    check(c_reduced > 0, "four-feature mode never used");
    check(dropped == 0 && edges_lost == 0, "messages or edges lost at bus rate");
    check(overrun == 0, "a window was stretched at bus rate");
    check(max_latency < WIN, $sformatf("analysis took %0d cycles, longer than a window", max_latency));
    check(c_correct * 100 >= 80 * c_labelled, $sformatf("only %0d of %0d windows labelled correctly", c_correct, c_labelled));
    $display("largest analysis latency %0d cycles (%0d us at 100 MHz)", max_latency, max_latency / 100);
    $display("results=%0d attacked=%0d free=%0d correct=%0d selfloop=%0d dangling=%0d odd=%0d even=%0d",
             c_results, c_att, c_free, c_correct, c_self, c_dang, c_odd, c_even);
    $display("dropped=%0d edges_lost=%0d overrun=%0d reduced=%0d nonconverged=%0d",
             dropped, edges_lost, overrun, c_reduced, c_nonconv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
