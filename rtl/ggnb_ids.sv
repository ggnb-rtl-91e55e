// ggnb_ids -- graph-based Gaussian naive Bayes intrusion detector for CAN.
//
// The detector watches the stream of received CAN arbitration IDs and, once
// per time window (23 ms by default), decides whether the window's traffic is
// attacked.  Each window is turned into a directed graph (IDs are vertices,
// consecutive IDs are edges); nine features of that graph -- vertex and edge
// counts, extreme in/out-degrees and the minimum, median and maximum PageRank
// -- are scored by a Gaussian naive Bayes model trained offline.
//
// Structure (all on-chip):
//   graph_builder    double-banked graph capture, window timer
//   degree_features  counts and degree extremes  \ run in parallel on the
//   pagerank_engine  PageRank of every vertex    / closed bank
//   pr_stats         min / median / max PageRank, after the PageRank run
//   gnb_classifier   log-domain naive Bayes decision
// A small controller here starts each stage and hands results on.  While the
// closed bank is analysed the next window is captured in the other bank; the
// analysis of a full window (512 vertices, 100 PageRank iterations) takes
// under 0.45 M cycles, much less than the 2.3 M-cycle window, so capture never
// waits in normal operation.  If it would, the window is stretched and
// `overrun` counts it.
//
// Interface.  id_valid/id_ready/id: received IDs (valid/ready).  Model port
// (mw_*) and feature_mask: see gnb_classifier; the host writes the trained
// model through it.  result_valid pulses once per window with the verdict,
// the features, both class scores, the PageRank iteration count and whether
// PageRank converged; all are held until the next result.  `windows` counts
// results; dropped / edges_lost / overrun are the builder's loss counters.
//
// From the method: the per-window graph, the nine features and their order,
// the 23 ms window and the Gaussian naive Bayes decision.  This design's own
// choices: the 100 MHz clock behind WINDOW_CYCLES, the table sizes (512, from
// the 460 frames a saturated 1 Mbit/s bus carries in 23 ms), double banking
// with stretched windows, the order in which the stages start, and offline
// training with a model write port.
module ggnb_ids
  import ggnb_pkg::*;
#(
  parameter int ID_W          = 11,
  parameter int MAX_NODES     = 512,
  parameter int MAX_EDGES     = 512,
  parameter int WINDOW_CYCLES = 2_300_000,
  parameter int MAX_ITER      = 100
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // received CAN IDs
  input  logic                      id_valid,
  output logic                      id_ready,
  input  logic [ID_W-1:0]           id,
  // model port (host)
  input  logic                      mw_en,
  input  model_sel_e                mw_sel,
  input  logic                      mw_class,
  input  logic [3:0]                mw_feat,
  input  logic [63:0]               mw_data,
  input  logic [N_FEAT-1:0]         feature_mask,
  // per-window result
  output logic                      result_valid,
  output logic                      attacked,
  output graph_features_t           features,
  output logic signed [SCORE_W-1:0] score_free,
  output logic signed [SCORE_W-1:0] score_att,
  output logic [15:0]               pr_iterations,
  output logic                      pr_converged,
  output logic [31:0]               windows,
  // loss counters
  output logic [31:0]               dropped,
  output logic [31:0]               edges_lost,
  output logic [31:0]               overrun
);

  localparam int NA_W = $clog2(MAX_NODES);
  localparam int EA_W = $clog2(MAX_EDGES);

  typedef enum logic [1:0] {C_IDLE, C_GRAPH, C_CLASSIFY} ctrl_e;

  ctrl_e            cstate;
  logic             win_closed;
  logic [CNT_W-1:0] rd_nodes, rd_edges;
  logic [NA_W-1:0]  na_addr, nb_addr, st_addr;
  logic [CNT_W-1:0] na_in_deg, na_out_deg, nb_out_deg;
  logic [EA_W-1:0]  e_addr;
  logic [NA_W-1:0]  e_src, e_dst;
  logic [PR_W-1:0]  pr_data;

  logic             deg_done, pr_done, st_done, cls_done;
  logic             deg_ok, st_ok;
  logic             deg_busy_unused, pr_busy_unused, st_busy_unused, cls_busy_unused;
  logic             stage_start, st_start, cls_start;
  logic [15:0]      iters;
  logic             conv;
  degree_features_t deg_feat;
  pr_features_t     pr_feat;
  graph_features_t  all_feat;
  logic             cls_attacked;
  logic signed [SCORE_W-1:0] s_free, s_att;

  graph_builder #(
    .ID_W(ID_W), .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES),
    .WINDOW_CYCLES(WINDOW_CYCLES)
  ) u_builder (
    .clk, .rst_n,
    .id_valid, .id_ready, .id,
    .ana_busy(cstate != C_IDLE), .win_closed,
    .rd_nodes, .rd_edges,
    .na_addr, .na_in_deg, .na_out_deg,
    .nb_addr, .nb_out_deg,
    .e_addr, .e_src, .e_dst,
    .dropped, .edges_lost, .overrun
  );

  degree_features #(.MAX_NODES(MAX_NODES)) u_degree (
    .clk, .rst_n,
    .start(stage_start), .n_nodes(rd_nodes), .n_edges(rd_edges),
    .na_addr, .na_in_deg, .na_out_deg,
    .busy(deg_busy_unused), .done(deg_done), .feat(deg_feat)
  );

  pagerank_engine #(
    .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES), .MAX_ITER(MAX_ITER)
  ) u_pagerank (
    .clk, .rst_n,
    .start(stage_start), .n_nodes(rd_nodes), .n_edges(rd_edges),
    .nb_addr, .nb_out_deg,
    .e_addr, .e_src, .e_dst,
    .pr_addr(st_addr), .pr_data,
    .busy(pr_busy_unused), .done(pr_done),
    .iterations(iters), .converged(conv)
  );

  pr_stats #(.MAX_NODES(MAX_NODES)) u_stats (
    .clk, .rst_n,
    .start(st_start), .n_nodes(rd_nodes),
    .pr_addr(st_addr), .pr_data,
    .busy(st_busy_unused), .done(st_done), .stats(pr_feat)
  );

  always_comb begin
    all_feat.nodes   = deg_feat.nodes;
    all_feat.edges   = deg_feat.edges;
    all_feat.max_in  = deg_feat.max_in;
    all_feat.max_out = deg_feat.max_out;
    all_feat.min_in  = deg_feat.min_in;
    all_feat.min_out = deg_feat.min_out;
    all_feat.med_pr  = pr_feat.med_pr;
    all_feat.max_pr  = pr_feat.max_pr;
    all_feat.min_pr  = pr_feat.min_pr;
  end

  gnb_classifier u_classifier (
    .clk, .rst_n,
    .mw_en, .mw_sel, .mw_class, .mw_feat, .mw_data, .feature_mask,
    .start(cls_start), .feat(all_feat),
    .busy(cls_busy_unused), .done(cls_done),
    .attacked(cls_attacked), .score_free(s_free), .score_att(s_att)
  );

  // controller
  assign stage_start = (cstate == C_IDLE) && win_closed;
  assign st_start    = pr_done;
  assign cls_start   = (cstate == C_GRAPH) && (deg_ok || deg_done) && (st_ok || st_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate        <= C_IDLE;
      deg_ok        <= 1'b0;
      st_ok         <= 1'b0;
      result_valid  <= 1'b0;
      attacked      <= 1'b0;
      features      <= '0;
      score_free    <= '0;
      score_att     <= '0;
      pr_iterations <= '0;
      pr_converged  <= 1'b0;
      windows       <= '0;
    end else begin
      result_valid <= 1'b0;
      unique case (cstate)
        C_IDLE: if (win_closed) begin
          deg_ok <= 1'b0;
          st_ok  <= 1'b0;
          cstate <= C_GRAPH;
        end
        C_GRAPH: begin
          if (deg_done) deg_ok <= 1'b1;
          if (st_done)  st_ok  <= 1'b1;
          if (cls_start) cstate <= C_CLASSIFY;
        end
        C_CLASSIFY: if (cls_done) begin
          result_valid  <= 1'b1;
          attacked      <= cls_attacked;
          features      <= all_feat;
          score_free    <= s_free;
          score_att     <= s_att;
          pr_iterations <= iters;
          pr_converged  <= conv;
          windows       <= windows + 1'b1;
          cstate        <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

endmodule
