// tb_ggnb_ids_window -- the detector at the two ends of the window-length
// range, 11.5 ms and 230 ms, end to end.
//
// Two ggnb_ids instances receive the same ID stream.  The stream is paced like
// a 1 Mbit/s CAN bus, one frame every 110 to 200 us, at 100 MHz.
//   run[0]: WINDOW_CYCLES = 1.15 M (11.5 ms) with the default 512/512 tables.
//   run[1]: WINDOW_CYCLES = 23 M (230 ms).  The tables are raised to 2048
//           vertices (every 11-bit ID) and 4608 edges (ten times the 460
//           frames of a saturated 23 ms window).  The default tables are
//           too small for a window this long.
// The traffic is normal for the first 230 ms window, then DoS flooding, then
// random-ID fuzzing.  Each instance gets its own Gaussian naive Bayes model,
// trained here on generated windows of its own length, because the count
// features scale with the window.  The testbench loads that model and checks
// every window's features, scores and verdict against the double-precision
// reference.  It also checks that nothing is lost, that no window is
// stretched, that both verdicts occur, and that most windows are labelled
// correctly.  Each valid is held until that instance has taken the ID, so
// both instances see an identical stream.  A frame that arrives
// while one instance is busy waits for it.
// The two window lengths are the ends of the range the method was evaluated
// over; the 230 ms table sizes and the traffic are this testbench's choices.
module tb_ggnb_ids_window;
  import ggnb_pkg::*;
  import ggnb_ref_pkg::*;

  localparam int NRUN = 2;
  localparam int WINS  [NRUN] = '{1_150_000, 23_000_000};
  localparam int MAXNS [NRUN] = '{512, 2048};
  localparam int MAXES [NRUN] = '{512, 4608};
  localparam int BIG_RESULTS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [10:0]     id = 0;
  logic [NRUN-1:0] vld = '0;
  logic [NRUN-1:0] rdy;
  logic [NRUN-1:0] loaded = '0;
  bit              cur_injected = 0;
  int              n_big = 0;    // results of the 230 ms instance

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int ids [$]; bit attack; } window_t;

  // traffic mode while the k-th 230 ms window is open
  function automatic int mode_of(input int k);
    case (k)
      0:       return 0;
      1:       return 1;
      default: return 2;
    endcase
  endfunction

  for (genvar g = 0; g < NRUN; g++) begin : run
    localparam int WIN  = WINS[g];
    localparam int MAXN = MAXNS[g];
    localparam int MAXE = MAXES[g];

    logic              mw_en = 0;
    model_sel_e        mw_sel = MW_MEAN;
    logic              mw_class = 0;
    logic [3:0]        mw_feat = 0;
    logic [63:0]       mw_data = 0;
    logic              result_valid, attacked, pr_converged;
    graph_features_t   features;
    logic signed [SCORE_W-1:0] score_free, score_att;
    logic [15:0]       pr_iterations;
    logic [31:0]       windows, dropped, edges_lost, overrun;

    ggnb_ids #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .WINDOW_CYCLES(WIN)) dut (
      .clk, .rst_n, .id_valid(vld[g]), .id_ready(rdy[g]), .id,
      .mw_en, .mw_sel, .mw_class, .mw_feat, .mw_data, .feature_mask(MASK_ALL),
      .result_valid, .attacked, .features, .score_free, .score_att,
      .pr_iterations, .pr_converged, .windows, .dropped, .edges_lost, .overrun
    );

    gnb_model model = new();
    traffic   tg    = new(24);

    task automatic write_word(input model_sel_e sel, input int c, input int f, input longint d);
      @(negedge clk);
      mw_en = 1; mw_sel = sel; mw_class = c[0]; mw_feat = 4'(f); mw_data = 64'(d);
      @(negedge clk);
      mw_en = 0;
    endtask

    // offline training on generated windows of this instance's length
    // (about one frame per 155 us), then loading the model
    initial begin
      ref_result_t r;
      int ids [$];
      bit inj;
      int frames;
      frames = WIN / 15_500;
      for (int t = 0; t < 30; t++) begin
        ids.delete();
        tg.mode = (t % 2 == 0) ? 0 : ((t % 4 == 1) ? 1 : 2);
        for (int k = 0; k < frames; k++) ids.push_back(tg.next(inj));
        r = window_features(ids, MAXN, MAXE);
        model.add(r.f, (tg.mode != 0) ? 1 : 0);
      end
      model.fit();
      @(posedge rst_n);
      for (int c = 0; c < 2; c++) begin
        for (int f = 0; f < N_FEAT; f++) begin
          write_word(MW_MEAN, c, f, model.q_mean[c][f]);
          write_word(MW_WEIGHT, c, f, model.q_wgt[c][f]);
        end
        write_word(MW_CONST, c, 0, model.q_const(c, MASK_ALL));
      end
      loaded[g] = 1'b1;
    end

    // messages accepted per window
    window_t cur;
    window_t closed_q [$];
    int n_closed = 0;
    always @(posedge clk) if (rst_n) begin
      if (dut.win_closed) begin
        n_closed++;
        closed_q.push_back(cur);
        cur.ids.delete();
        cur.attack = 0;
      end
      if (vld[g] && rdy[g]) begin
        cur.ids.push_back(int'(id));
        if (cur_injected) cur.attack = 1;
      end
    end

    int c_results = 0, c_att = 0, c_free = 0, c_correct = 0, max_latency = 0;
    int t_closed = 0, cyc = 0;
    always @(posedge clk) begin
      cyc++;
      if (dut.win_closed) t_closed = cyc;
      if (result_valid && cyc - t_closed > max_latency) max_latency = cyc - t_closed;
    end

    always @(posedge clk) if (rst_n && result_valid) begin
      window_t w;
      ref_result_t r;
      real hs0, hs1, rs0, rs1, tol, d;
      real hpr [3];
      if (closed_q.size() == 0) begin
        check(0, $sformatf("run %0d: result without a closed window", g));
      end else begin
        w = closed_q.pop_front();
        r = window_features(w.ids, MAXN, MAXE);
        c_results++;
        if (g == NRUN - 1) n_big++;
        check(int'(features.nodes) == r.n && int'(features.edges) == r.e,
              $sformatf("run %0d result %0d: n/e %0d/%0d vs %0d/%0d", g, c_results,
                        features.nodes, features.edges, r.n, r.e));
        check(real'(features.max_in) == r.f[F_MAX_IN] && real'(features.max_out) == r.f[F_MAX_OUT] &&
              real'(features.min_in) == r.f[F_MIN_IN] && real'(features.min_out) == r.f[F_MIN_OUT],
              $sformatf("run %0d result %0d: degree extremes", g, c_results));
        hpr[0] = real'(features.med_pr) / real'(1 << PR_FRAC);
        hpr[1] = real'(features.max_pr) / real'(1 << PR_FRAC);
        hpr[2] = real'(features.min_pr) / real'(1 << PR_FRAC);
        for (int k = 0; k < 3; k++) begin
          d = hpr[k] - r.f[int'(F_MED_PR) + k];
          if (d < 0) d = -d;
          check(d < 5e-5, $sformatf("run %0d result %0d: PageRank feature %0d: %g vs %g", g, c_results,
                                    k, hpr[k], r.f[int'(F_MED_PR) + k]));
        end
        check(pr_converged, $sformatf("run %0d result %0d: PageRank did not converge", g, c_results));
        hs0 = real'(score_free) / real'(1 << SCORE_FRAC);
        hs1 = real'(score_att) / real'(1 << SCORE_FRAC);
        rs0 = model.score(r.f, 0, MASK_ALL);
        rs1 = model.score(r.f, 1, MASK_ALL);
        tol = 0.5 + 1e-3 * (((rs0 < 0) ? -rs0 : rs0) + ((rs1 < 0) ? -rs1 : rs1));
        d = (hs0 - rs0); if (d < 0) d = -d;
        check(d <= tol, $sformatf("run %0d result %0d: free score %f vs %f", g, c_results, hs0, rs0));
        d = (hs1 - rs1); if (d < 0) d = -d;
        check(d <= tol, $sformatf("run %0d result %0d: attack score %f vs %f", g, c_results, hs1, rs1));
        d = rs1 - rs0;
        if (d > 2.0 * tol || d < -2.0 * tol)
          check(attacked == (d > 0), $sformatf("run %0d result %0d: verdict %0d vs reference %f",
                                               g, c_results, attacked, d));
        if (attacked) c_att++; else c_free++;
        if (attacked == w.attack) c_correct++;
        if (g == NRUN - 1 || c_results % 5 == 0)
          $display("run %0d window %0d: %s n=%0d e=%0d maxin=%0d maxPR=%f it=%0d -> %s",
                   g, c_results, w.attack ? "attack" : "normal", r.n, r.e, features.max_in,
                   hpr[1], pr_iterations, attacked ? "ATTACKED" : "free");
      end
    end

    task automatic final_checks();
      check(windows == 32'(c_results), $sformatf("run %0d: window counter", g));
      check(c_att > 0 && c_free > 0, $sformatf("run %0d: only one verdict seen", g));
      check(dropped == 0 && edges_lost == 0, $sformatf("run %0d: messages or edges lost", g));
      check(overrun == 0, $sformatf("run %0d: a window was stretched", g));
      check(max_latency < WIN, $sformatf("run %0d: analysis took %0d cycles", g, max_latency));
      check(c_correct * 100 >= 80 * c_results,
            $sformatf("run %0d: only %0d of %0d windows labelled correctly", g, c_correct, c_results));
      $display("run %0d (%0d.%0d ms, %0d/%0d tables): results=%0d attacked=%0d free=%0d correct=%0d largest latency=%0d cycles",
               g, WIN / 100_000, (WIN / 10_000) % 10, MAXN, MAXE, c_results, c_att, c_free, c_correct,
               max_latency);
    endtask
  end

  traffic gen = new(24);

  initial begin
    bit inj;
    logic [NRUN-1:0] take;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (&loaded);
    @(negedge clk);
    while (n_big < BIG_RESULTS) begin
      gen.mode = mode_of(run[NRUN-1].n_closed);
      id = 11'(gen.next(inj));
      cur_injected = inj;
      vld = '1;
      forever begin
        take = vld & rdy;
        @(negedge clk);
        vld = vld & ~take;
        if (vld == '0) break;
      end
      repeat ($urandom_range(11_000, 20_000)) @(negedge clk);
    end
    // let the short-window instance finish the analysis in flight
    while (run[0].closed_q.size() != 0) @(negedge clk);
    repeat (100) @(negedge clk);
    run[0].final_checks();
    run[1].final_checks();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
