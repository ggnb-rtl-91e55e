// tb_gnb_classifier -- self-checking test of gnb_classifier.
//
// A two-class Gaussian model is made up here (attack-free windows with about
// 40 vertices and evenly spread PageRank; attacked windows with a hub vertex
// of high in-degree and PageRank, as in a flooding attack), quantised and
// written through the model port.  Feature vectors drawn from both classes
// are classified with all nine features, with the reduced four-feature
// mask and with the two-degree-feature mask 9'h00C.  Each score is compared
// with a double-precision evaluation of the same quantised model, each
// verdict with the sign of the reference score difference, and the
// start-to-done latency with its 11 cycles.  The fraction of correctly
// labelled windows is also required to be high.
// The log-domain Gaussian naive Bayes rule and the two reduced feature sets
// come from the method; the made-up class statistics are this testbench's.
module tb_gnb_classifier;
  import ggnb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              mw_en = 0;
  model_sel_e        mw_sel = MW_MEAN;
  logic              mw_class = 0;
  logic [3:0]        mw_feat = 0;
  logic [63:0]       mw_data = 0;
  logic [N_FEAT-1:0] feature_mask = MASK_ALL;
  logic              start = 0, busy, done, attacked;
  graph_features_t   feat = '0;
  logic signed [SCORE_W-1:0] score_free, score_att;

  gnb_classifier dut (
    .clk, .rst_n, .mw_en, .mw_sel, .mw_class, .mw_feat, .mw_data, .feature_mask,
    .start, .feat, .busy, .done, .attacked, .score_free, .score_att
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model (real): class 0 attack free, class 1 attacked; order as feat_idx_e
  real mu  [2][N_FEAT];
  real sg  [2][N_FEAT];
  real prior [2];
  // quantised model as written
  real qmu [2][N_FEAT];
  real qw  [2][N_FEAT];
  real qk  [2];

  function automatic real gauss();   // standard normal, Box-Muller
    real u1, u2;
    u1 = (real'($urandom_range(1, 1 << 30))) / real'(1 << 30);
    u2 = (real'($urandom_range(0, 1 << 30))) / real'(1 << 30);
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic write_word(input model_sel_e sel, input int c, input int f, input logic [63:0] d);
    @(negedge clk);
    mw_en = 1; mw_sel = sel; mw_class = c[0]; mw_feat = 4'(f); mw_data = d;
    @(negedge clk);
    mw_en = 0;
  endtask

  task automatic load_model(input logic [N_FEAT-1:0] mask);
    longint m, w, k;
    real kr;
    for (int c = 0; c < 2; c++) begin
      kr = $ln(prior[c]);
      for (int f = 0; f < N_FEAT; f++) begin
        m = longint'(mu[c][f] * real'(1 << FEAT_FRAC));
        w = longint'(1.0 / (2.0 * sg[c][f] * sg[c][f]) * real'(1 << WGT_FRAC));
        qmu[c][f] = real'(m) / real'(1 << FEAT_FRAC);
        qw[c][f]  = real'(w) / real'(1 << WGT_FRAC);
        if (mask[f]) kr -= $ln(sg[c][f]);
        write_word(MW_MEAN, c, f, 64'(m));
        write_word(MW_WEIGHT, c, f, 64'(w));
      end
      k = longint'(kr * real'(1 << SCORE_FRAC));
      qk[c] = real'(k) / real'(1 << SCORE_FRAC);
      write_word(MW_CONST, c, 0, 64'(k));
    end
    feature_mask = mask;
  endtask

  real xv [N_FEAT];

  task automatic draw(input int c);
    int v;
    for (int f = 0; f < N_FEAT; f++) begin
      xv[f] = mu[c][f] + sg[c][f] * gauss();
      if (xv[f] < 0.0) xv[f] = 0.0;
    end
    // quantise as the hardware sees it
    for (int f = 0; f < 6; f++) begin
      v = int'(xv[f]);
      xv[f] = real'(v);
    end
    for (int f = 6; f < 9; f++) begin
      if (xv[f] > 0.99) xv[f] = 0.99;
      v = int'(xv[f] * real'(1 << PR_FRAC));
      xv[f] = real'(v) / real'(1 << PR_FRAC);
    end
    feat.nodes   = CNT_W'(int'(xv[0]));
    feat.edges   = CNT_W'(int'(xv[1]));
    feat.max_in  = CNT_W'(int'(xv[2]));
    feat.max_out = CNT_W'(int'(xv[3]));
    feat.min_in  = CNT_W'(int'(xv[4]));
    feat.min_out = CNT_W'(int'(xv[5]));
    feat.med_pr  = PR_W'(int'(xv[6] * real'(1 << PR_FRAC)));
    feat.max_pr  = PR_W'(int'(xv[7] * real'(1 << PR_FRAC)));
    feat.min_pr  = PR_W'(int'(xv[8] * real'(1 << PR_FRAC)));
  endtask

  int correct = 0, total = 0;

  task automatic classify_and_check(input int truth, input logic [N_FEAT-1:0] mask, input string tag);
    real r [2];
    real d, tol, hs [2];
    int cycles;
    for (int c = 0; c < 2; c++) begin
      r[c] = qk[c];
      for (int f = 0; f < N_FEAT; f++)
        if (mask[f]) r[c] -= (xv[f] - qmu[c][f]) * (xv[f] - qmu[c][f]) * qw[c][f];
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    check(cycles == 11, $sformatf("%s: latency %0d cycles", tag, cycles));
    hs[0] = real'(score_free) / real'(1 << SCORE_FRAC);
    hs[1] = real'(score_att) / real'(1 << SCORE_FRAC);
    for (int c = 0; c < 2; c++) begin
      tol = 1e-3 + 1e-6 * ((r[c] < 0) ? -r[c] : r[c]);
      d = hs[c] - r[c];
      if (d < 0) d = -d;
      check(d <= tol, $sformatf("%s: class %0d score %f vs reference %f", tag, c, hs[c], r[c]));
    end
    d = r[1] - r[0];
    if (d > 0.01 || d < -0.01)
      check(attacked == (d > 0), $sformatf("%s: verdict %0d, reference difference %f", tag, attacked, d));
    total++;
    if (int'(attacked) == truth) correct++;
  endtask

  initial begin
    // attack free: ~40 IDs, ring-like traffic, PageRank near 1/40
    static real m0 [N_FEAT] = '{40.0, 80.0, 4.0, 4.0, 1.0, 1.0, 0.024, 0.040, 0.010};
    static real s0 [N_FEAT] = '{3.0, 6.0, 1.0, 1.0, 0.5, 0.5, 0.002, 0.006, 0.002};
    // attacked: a flooding ID becomes a hub
    static real m1 [N_FEAT] = '{38.0, 75.0, 30.0, 30.0, 1.0, 1.0, 0.020, 0.300, 0.009};
    static real s1 [N_FEAT] = '{4.0, 8.0, 6.0, 6.0, 0.5, 0.5, 0.003, 0.050, 0.002};
    for (int f = 0; f < N_FEAT; f++) begin
      mu[0][f] = m0[f]; sg[0][f] = s0[f];
      mu[1][f] = m1[f]; sg[1][f] = s1[f];
    end
    prior[0] = 0.5; prior[1] = 0.5;

    repeat (3) @(negedge clk);
    rst_n = 1;

    load_model(MASK_ALL);
    for (int t = 0; t < 100; t++) begin
      draw(t % 2);
      classify_and_check(t % 2, MASK_ALL, $sformatf("nine t%0d", t));
    end
    check(correct * 100 >= 95 * total, $sformatf("nine features: %0d of %0d correct", correct, total));
    $display("nine features: %0d of %0d correct", correct, total);

    correct = 0; total = 0;
    load_model(MASK_REDUCED);
    for (int t = 0; t < 100; t++) begin
      draw(t % 2);
      classify_and_check(t % 2, MASK_REDUCED, $sformatf("four t%0d", t));
    end
    check(correct * 100 >= 95 * total, $sformatf("four features: %0d of %0d correct", correct, total));
    $display("four features: %0d of %0d correct", correct, total);

    // two-feature model: maximum in-degree and maximum out-degree only
    correct = 0; total = 0;
    load_model(9'h00C);
    for (int t = 0; t < 50; t++) begin
      draw(t % 2);
      classify_and_check(t % 2, 9'h00C, $sformatf("two t%0d", t));
    end
    check(correct * 100 >= 95 * total, $sformatf("two features: %0d of %0d correct", correct, total));
    $display("two features: %0d of %0d correct", correct, total);

    // priors alone decide when every feature is masked off
    prior[0] = 0.9; prior[1] = 0.1;
    load_model('0);
    draw(1);
    classify_and_check(0, '0, "priors only");
    check(!attacked, "priors only: attack-free prior should win");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
