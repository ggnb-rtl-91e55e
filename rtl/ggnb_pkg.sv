// ggnb_pkg -- types and constants shared by the graph-based Gaussian naive
// Bayes (GGNB) CAN intrusion detector.
//
// The detector turns every time window of CAN traffic into a directed graph
// (one vertex per arbitration ID, one edge per pair of consecutive IDs),
// extracts nine graph features from it and classifies the window as attacked
// or attack free with a Gaussian naive Bayes model.  The nine features and
// their order follow the feature table of the method: nodes, edges, maximum
// in-degree, maximum out-degree, minimum in-degree, minimum out-degree, median
// PageRank, maximum PageRank, minimum PageRank.
//
// Number formats (this implementation's choice; the method itself is defined
// on real numbers):
//   counts      CNT_W-bit unsigned integers
//   PageRank    unsigned Q1.24 (PR_W = 25 bits), 1.0 = 1 << PR_FRAC
//   features    unsigned Q16.24 (FEAT_W = 40 bits): counts shifted left by
//               FEAT_FRAC, PageRank values used as they are
//   model       mean: Q16.24 like the features; weight 1/(2 sigma^2): unsigned
//               Q24.16; class constant and scores: signed Q47.16
package ggnb_pkg;

  localparam int CNT_W     = 16;
  localparam int PR_FRAC   = 24;
  localparam int PR_W      = PR_FRAC + 1;
  localparam int FEAT_FRAC = PR_FRAC;
  localparam int FEAT_W    = CNT_W + FEAT_FRAC;
  localparam int WGT_FRAC  = 16;
  localparam int WGT_W     = 40;
  localparam int SCORE_FRAC = 16;
  localparam int SCORE_W   = 64;
  localparam int N_FEAT    = 9;

  // Feature index, in the order of the method's feature table.
  typedef enum logic [3:0] {
    F_NODES   = 4'd0,
    F_EDGES   = 4'd1,
    F_MAX_IN  = 4'd2,
    F_MAX_OUT = 4'd3,
    F_MIN_IN  = 4'd4,
    F_MIN_OUT = 4'd5,
    F_MED_PR  = 4'd6,
    F_MAX_PR  = 4'd7,
    F_MIN_PR  = 4'd8
  } feat_idx_e;

  // All nine features of one window, in their native formats.
  typedef struct packed {
    logic [CNT_W-1:0] nodes;
    logic [CNT_W-1:0] edges;
    logic [CNT_W-1:0] max_in;
    logic [CNT_W-1:0] max_out;
    logic [CNT_W-1:0] min_in;
    logic [CNT_W-1:0] min_out;
    logic [PR_W-1:0]  med_pr;
    logic [PR_W-1:0]  max_pr;
    logic [PR_W-1:0]  min_pr;
  } graph_features_t;

  // The six structural features produced by the degree scan.
  typedef struct packed {
    logic [CNT_W-1:0] nodes;
    logic [CNT_W-1:0] edges;
    logic [CNT_W-1:0] max_in;
    logic [CNT_W-1:0] max_out;
    logic [CNT_W-1:0] min_in;
    logic [CNT_W-1:0] min_out;
  } degree_features_t;

  // The three PageRank-related features.
  typedef struct packed {
    logic [PR_W-1:0] med_pr;
    logic [PR_W-1:0] max_pr;
    logic [PR_W-1:0] min_pr;
  } pr_features_t;

  // Selector of the model word written through the classifier's model port.
  typedef enum logic [1:0] {
    MW_MEAN   = 2'd0,   // mean of feature i for class c (Q16.24)
    MW_WEIGHT = 2'd1,   // 1/(2 sigma^2) of feature i for class c (Q24.16)
    MW_CONST  = 2'd2    // ln P(c) - sum_i ln sigma_ci (signed Q47.16)
  } model_sel_e;

  // Feature masks: all nine features, and the four-feature reduced model
  // (maximum in-degree, maximum out-degree, median and maximum PageRank).
  localparam logic [N_FEAT-1:0] MASK_ALL     = 9'h1FF;
  localparam logic [N_FEAT-1:0] MASK_REDUCED = 9'b0_1100_1100;

  // Convert a window's features to the classifier's common Q16.24 format.
  function automatic logic [N_FEAT-1:0][FEAT_W-1:0] to_feat_vec(input graph_features_t f);
    logic [N_FEAT-1:0][FEAT_W-1:0] v;
    v[F_NODES]   = FEAT_W'(f.nodes)   << FEAT_FRAC;
    v[F_EDGES]   = FEAT_W'(f.edges)   << FEAT_FRAC;
    v[F_MAX_IN]  = FEAT_W'(f.max_in)  << FEAT_FRAC;
    v[F_MAX_OUT] = FEAT_W'(f.max_out) << FEAT_FRAC;
    v[F_MIN_IN]  = FEAT_W'(f.min_in)  << FEAT_FRAC;
    v[F_MIN_OUT] = FEAT_W'(f.min_out) << FEAT_FRAC;
    v[F_MED_PR]  = FEAT_W'(f.med_pr);
    v[F_MAX_PR]  = FEAT_W'(f.max_pr);
    v[F_MIN_PR]  = FEAT_W'(f.min_pr);
    return v;
  endfunction

endpackage
