// pagerank_engine -- iterative fixed-point PageRank of a window's CAN-ID graph.
//
// Every vertex v gets
//   PR(v) = (1-d)/n + d * ( sum_{u->v} PR(u)/outdeg(u) + sum_{u dangling} PR(u)/n )
// starting from PR = 1/n for all n vertices, iterated until no value changes
// by more than TOL_LSB (default 16 LSB, about 1e-6), or for MAX_ITER iterations.
// The method stops when no value is updated any more; the small tolerance is
// added because truncating fixed-point arithmetic can otherwise settle into a
// limit cycle a few LSBs wide instead of a fixed point.  The sum over
// in-neighbours is the method's basic PageRank equation; the damping d = 0.85 and the uniform redistribution of
// the rank of vertices without out-edges are this design's choice, taken
// because they reproduce the PageRank values printed in the method's example
// graphs (0.45/0.24/0.17/0.13 for the four-vertex DoS example, 0.25 each for
// the four-vertex ring), which the undamped equation alone does not.
//
// How it works.  Once per window a sequential divider forms 1/n and the
// reciprocal of every out-degree, so the iterations need only multipliers.
// Each iteration then runs three sequential passes over on-chip arrays:
//   P1  (n cycles) contrib[u] = PR(u) * 1/outdeg(u); sum the dangling rank
//   P2  (e cycles) acc[v] += contrib[u] for every edge u->v
//   P4  (n cycles) PR(v) = base + d * acc[v], base = (1-d)/n + d*dangling/n
// with one cycle (P3) in between to form `base`.  An iteration takes
// 2n + e + 1 cycles; the set-up takes about 34 cycles per vertex.
//
// Interface.  `start` begins a run on n_nodes/n_edges of the graph the node
// and edge read ports (combinational, owned by the graph builder) show; `done`
// pulses at the end, when `iterations` and `converged` are valid and the
// pr_addr/pr_data port (combinational) reads the final values, unsigned Q1.24.
// The values stay until the next `start`.
module pagerank_engine
  import ggnb_pkg::*;
#(
  parameter int MAX_NODES = 512,
  parameter int MAX_EDGES = 512,
  parameter int MAX_ITER  = 100,
  parameter logic [16:0] DAMP_Q16 = 17'd55706,   // 0.85 in Q0.16
  parameter int TOL_LSB   = 16,                  // a change of at most this many LSBs (~1e-6) counts as none
  localparam int NA_W = $clog2(MAX_NODES),
  localparam int EA_W = $clog2(MAX_EDGES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] n_nodes,
  input  logic [CNT_W-1:0] n_edges,
  // graph read ports
  output logic [NA_W-1:0]  nb_addr,
  input  logic [CNT_W-1:0] nb_out_deg,
  output logic [EA_W-1:0]  e_addr,
  input  logic [NA_W-1:0]  e_src,
  input  logic [NA_W-1:0]  e_dst,
  // result read port
  input  logic [NA_W-1:0]  pr_addr,
  output logic [PR_W-1:0]  pr_data,
  output logic             busy,
  output logic             done,
  output logic [15:0]      iterations,
  output logic             converged
);

  localparam logic [PR_W-1:0] ONE = PR_W'(1) << PR_FRAC;
  localparam int ACC_W = PR_W + 1;

  typedef enum logic [3:0] {
    S_IDLE, S_INVN, S_INVN_WAIT, S_RECIP, S_RECIP_WAIT,
    S_P1, S_P2, S_P3, S_P4, S_DONE
  } state_e;

  logic [PR_W-1:0]  pr      [MAX_NODES];
  logic [PR_W-1:0]  recip   [MAX_NODES];   // 1/outdeg in Q1.24, 0 for a dangling vertex
  logic [PR_W-1:0]  contrib [MAX_NODES];
  logic [ACC_W-1:0] acc     [MAX_NODES];

  state_e           state;
  logic [CNT_W-1:0] n, e_n;
  logic [CNT_W-1:0] i;
  logic [PR_W-1:0]  inv_n;
  logic [PR_W-1:0]  teleport;
  logic [ACC_W-1:0] dang;
  logic [PR_W-1:0]  base;
  logic             changed;

  // divider
  logic        div_start, div_busy, div_done;
  logic [31:0] div_dvs, div_q;

  seq_divider #(.W(32)) u_div (
    .clk, .rst_n,
    .start(div_start), .dividend(32'(ONE)), .divisor(div_dvs),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  assign nb_addr = NA_W'(i);
  assign e_addr  = EA_W'(i);
  assign pr_data = pr[pr_addr];

  // arithmetic of the passes
  logic [2*PR_W-1:0]   prod_contrib;
  logic [ACC_W+16:0]   prod_acc;
  logic [ACC_W+16:0]   prod_dang;
  logic [ACC_W+PR_W:0] prod_base;
  logic [ACC_W+1:0]    pr_new_w;
  logic [PR_W-1:0]     pr_new;
  logic [PR_W+16:0]    prod_tele;
  logic                moved;

  always_comb begin
    prod_contrib = (2*PR_W)'(pr[NA_W'(i)]) * (2*PR_W)'(recip[NA_W'(i)]);
    prod_acc     = (ACC_W+17)'(acc[NA_W'(i)]) * (ACC_W+17)'(DAMP_Q16);
    prod_dang    = (ACC_W+17)'(dang) * (ACC_W+17)'(DAMP_Q16);
    prod_base    = (ACC_W+PR_W+1)'(prod_dang >> 16) * (ACC_W+PR_W+1)'(inv_n);
    prod_tele    = (PR_W+17)'(17'h10000 - DAMP_Q16) * (PR_W+17)'(div_q[PR_W-1:0]);
    pr_new_w     = (ACC_W+2)'(base) + (ACC_W+2)'(prod_acc >> 16);
    pr_new       = (pr_new_w > (ACC_W+2)'({PR_W{1'b1}})) ? {PR_W{1'b1}} : PR_W'(pr_new_w);
    moved        = (pr_new > pr[NA_W'(i)]) ? (pr_new - pr[NA_W'(i)] > PR_W'(TOL_LSB))
                                           : (pr[NA_W'(i)] - pr_new > PR_W'(TOL_LSB));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      n          <= '0;
      e_n        <= '0;
      i          <= '0;
      inv_n      <= '0;
      teleport   <= '0;
      dang       <= '0;
      base       <= '0;
      changed    <= 1'b0;
      div_start  <= 1'b0;
      div_dvs    <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      iterations <= '0;
      converged  <= 1'b0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n          <= n_nodes;
          e_n        <= n_edges;
          busy       <= 1'b1;
          iterations <= '0;
          converged  <= 1'b0;
          state      <= (n_nodes == '0) ? S_DONE : S_INVN;
        end

        S_INVN: begin
          div_dvs   <= 32'(n);
          div_start <= 1'b1;
          state     <= S_INVN_WAIT;
        end

        S_INVN_WAIT: if (div_done) begin
          inv_n    <= div_q[PR_W-1:0];
          teleport <= PR_W'(prod_tele >> 16);
          i        <= '0;
          state    <= S_RECIP;
        end

        // 1/outdeg of every vertex, initial rank 1/n
        S_RECIP: begin
          pr[NA_W'(i)] <= inv_n;
          if (nb_out_deg == '0) begin
            recip[NA_W'(i)] <= '0;
            if (i == n - 1'b1) begin
              i     <= '0;
              dang  <= '0;
              state <= S_P1;
            end else begin
              i <= i + 1'b1;
            end
          end else begin
            div_dvs   <= 32'(nb_out_deg);
            div_start <= 1'b1;
            state     <= S_RECIP_WAIT;
          end
        end

        S_RECIP_WAIT: if (div_done) begin
          recip[NA_W'(i)] <= div_q[PR_W-1:0];
          if (i == n - 1'b1) begin
            i     <= '0;
            dang  <= '0;
            state <= S_P1;
          end else begin
            i     <= i + 1'b1;
            state <= S_RECIP;
          end
        end

        // P1: per-vertex contribution, dangling sum, clear accumulators
        S_P1: begin
          contrib[NA_W'(i)] <= PR_W'(prod_contrib >> PR_FRAC);
          acc[NA_W'(i)]     <= '0;
          if (recip[NA_W'(i)] == '0) dang <= dang + ACC_W'(pr[NA_W'(i)]);
          if (i == n - 1'b1) begin
            i     <= '0;
            state <= (e_n == '0) ? S_P3 : S_P2;
          end else begin
            i <= i + 1'b1;
          end
        end

        // P2: scatter contributions along the edges
        S_P2: begin
          acc[e_dst] <= acc[e_dst] + ACC_W'(contrib[e_src]);
          if (i == e_n - 1'b1) begin
            i     <= '0;
            state <= S_P3;
          end else begin
            i <= i + 1'b1;
          end
        end

        S_P3: begin
          base    <= teleport + PR_W'(prod_base >> PR_FRAC);
          changed <= 1'b0;
          i       <= '0;
          state   <= S_P4;
        end

        // P4: new ranks, change detection
        S_P4: begin
          pr[NA_W'(i)] <= pr_new;
          if (i == n - 1'b1) begin
            iterations <= iterations + 1'b1;
            i          <= '0;
            dang       <= '0;
            if (!(changed || moved)) begin
              converged <= 1'b1;
              state     <= S_DONE;
            end else if (iterations == 16'(MAX_ITER - 1)) begin
              state <= S_DONE;
            end else begin
              state <= S_P1;
            end
          end else begin
            changed <= changed || moved;
            i       <= i + 1'b1;
          end
        end

        S_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
