// gnb_classifier -- Gaussian naive Bayes decision for one window.
//
// For each class c (0 = attack free, 1 = attacked) the block evaluates the
// logarithm of prior times Gaussian likelihoods, dropping the term -ln(2 pi)/2
// per feature that both classes share:
//   score_c = K_c - sum_{i in mask} (x_i - mu_ci)^2 * w_ci
//   K_c     = ln P(c) - sum_{i in mask} ln sigma_ci,   w_ci = 1 / (2 sigma_ci^2)
// and reports `attacked` when score_1 > score_0, i.e. when the attack score
// exceeds the attack-free score, which is the method's decision rule taken
// in the log domain to avoid underflow.  The model (mu, w, K) is trained
// offline and written through the model port; the feature mask selects the
// features used (all nine, or the reduced four-feature model: maximum in- and
// out-degree, median and maximum PageRank).  K_c must be computed by the
// trainer for the same mask.
//
// How it works.  `start` latches the nine features, converted to Q16.24.
// One feature per cycle is then processed for both classes in parallel (two
// subtract-square-multiply lanes); masked-off features still take their
// cycle.  `done` pulses 11 cycles after `start`, with `attacked` and both
// scores (signed Q47.16) valid until the next start.  Scores saturate rather
// than wrap.
//
// Model port: mw_en writes mw_data into the word chosen by mw_sel (mean,
// weight or class constant), mw_class and mw_feat.  Means are Q16.24 (low
// FEAT_W bits), weights unsigned Q24.16 (low WGT_W bits), constants signed
// Q47.16.  Writes are accepted at any time; a write during a classification
// may affect it.
module gnb_classifier
  import ggnb_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // model port
  input  logic                     mw_en,
  input  model_sel_e               mw_sel,
  input  logic                     mw_class,
  input  logic [3:0]               mw_feat,
  input  logic [63:0]              mw_data,
  input  logic [N_FEAT-1:0]        feature_mask,
  // classification
  input  logic                     start,
  input  graph_features_t          feat,
  output logic                     busy,
  output logic                     done,
  output logic                     attacked,
  output logic signed [SCORE_W-1:0] score_free,
  output logic signed [SCORE_W-1:0] score_att
);

  localparam int D_W    = FEAT_W + 1;
  localparam int SQ_W   = 2 * D_W;
  localparam int TERM_W = SQ_W + WGT_W;
  localparam int SHIFT  = 2 * FEAT_FRAC + WGT_FRAC - SCORE_FRAC;
  localparam logic signed [SCORE_W+1:0] SMIN = -(SCORE_W+2)'(64'sh4000_0000_0000_0000);
  localparam logic [TERM_W-1:0]        TMAX = TERM_W'(64'h3FFF_FFFF_FFFF_FFFF);

  logic [FEAT_W-1:0]         mean  [2][N_FEAT];
  logic [WGT_W-1:0]          wgt   [2][N_FEAT];
  logic signed [SCORE_W-1:0] kc    [2];

  logic [N_FEAT-1:0][FEAT_W-1:0] x;
  logic [N_FEAT-1:0]             mask;
  logic signed [SCORE_W-1:0]     acc [2];
  logic [3:0]                    k;
  logic                          run, fin;

  // model port
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < 2; c++) begin
        kc[c] <= '0;
        for (int f = 0; f < N_FEAT; f++) begin
          mean[c][f] <= '0;
          wgt[c][f]  <= '0;
        end
      end
    end else if (mw_en && mw_feat < 4'(N_FEAT)) begin
      unique case (mw_sel)
        MW_MEAN:   mean[mw_class][mw_feat] <= mw_data[FEAT_W-1:0];
        MW_WEIGHT: wgt[mw_class][mw_feat]  <= mw_data[WGT_W-1:0];
        MW_CONST:  kc[mw_class]            <= mw_data;
        default: ;
      endcase
    end
  end

  // one lane per class: term = (x - mu)^2 * w, kept exact until the final
  // shift to the score format (large weights on PageRank features need the
  // low bits of the square), saturated
  logic signed [SCORE_W+1:0] nxt [2];
  always_comb begin
    for (int c = 0; c < 2; c++) begin
      logic signed [D_W-1:0]  d;
      logic [SQ_W-1:0]        sq;
      logic [TERM_W-1:0]      prod;
      logic [TERM_W-1:0]      term;
      d    = $signed({1'b0, x[k]}) - $signed({1'b0, mean[c][k]});
      sq   = SQ_W'(d * d);
      prod = TERM_W'(sq) * TERM_W'(wgt[c][k]);
      term = prod >> SHIFT;
      if (term > TMAX) term = TMAX;
      nxt[c] = (SCORE_W+2)'(acc[c]) - $signed({2'b00, term[SCORE_W-1:0]});
      if (nxt[c] < SMIN) nxt[c] = SMIN;
    end
  end

  assign busy = run || fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x          <= '0;
      mask       <= '0;
      acc[0]     <= '0;
      acc[1]     <= '0;
      k          <= '0;
      run        <= 1'b0;
      fin        <= 1'b0;
      done       <= 1'b0;
      attacked   <= 1'b0;
      score_free <= '0;
      score_att  <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start && !busy) begin
        x      <= to_feat_vec(feat);
        mask   <= feature_mask;
        acc[0] <= kc[0];
        acc[1] <= kc[1];
        k      <= '0;
        run    <= 1'b1;
      end else if (run) begin
        for (int c = 0; c < 2; c++)
          if (mask[k]) acc[c] <= SCORE_W'(nxt[c]);
        if (k == 4'(N_FEAT - 1)) begin
          run <= 1'b0;
          fin <= 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end else if (fin) begin
        score_free <= acc[0];
        score_att  <= acc[1];
        attacked   <= acc[1] > acc[0];
        done       <= 1'b1;
      end
    end
  end

endmodule
