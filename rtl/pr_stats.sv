// pr_stats -- minimum, median and maximum of a window's PageRank values.
//
// These are the three PageRank-related features of the method.  The median
// follows the usual definition: for an even count it is the mean of the two
// middle values (truncated to the LSB).
//
// How it works.  Pass 1 (n cycles) reads every value once for the minimum and
// maximum.  The median is then found by rank selection, without sorting: for
// each candidate value v_i (one cycle to load it) the block counts, over all j
// (n cycles), how many values are smaller and how many are equal.  v_i is the
// k-th smallest for every k from `less` to `less + equal - 1`, so the two
// middle ranks (n-1)/2 and n/2 are recognised as soon as a candidate covers
// them; the search stops when both are known.  Worst case n + n*(n+2) + 3
// cycles from start to done (about 0.26 M cycles for 512 vertices), well
// inside one window.
//
// Interface.  `start` with n_nodes; the block reads the values through the
// combinational pr_addr/pr_data port; `done` pulses with `stats` valid
// (held until the next start).  n_nodes = 0 gives all-zero statistics.
module pr_stats
  import ggnb_pkg::*;
#(
  parameter int MAX_NODES = 512,
  localparam int NA_W = $clog2(MAX_NODES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] n_nodes,
  output logic [NA_W-1:0]  pr_addr,
  input  logic [PR_W-1:0]  pr_data,
  output logic             busy,
  output logic             done,
  output pr_features_t     stats
);

  typedef enum logic [2:0] {S_IDLE, S_MINMAX, S_LOAD, S_COUNT, S_DECIDE, S_DONE} state_e;

  state_e           state;
  logic [CNT_W-1:0] n, i, j;
  logic [CNT_W-1:0] less, equal;
  logic [PR_W-1:0]  vi;
  logic [PR_W-1:0]  mn, mx;
  logic [PR_W-1:0]  lo_val, hi_val;
  logic             lo_ok, hi_ok;
  logic [CNT_W-1:0] k_lo, k_hi;

  assign pr_addr = (state == S_COUNT) ? NA_W'(j) : NA_W'(i);

  // rank range covered by the current candidate: [less, less+equal-1]
  logic lo_hit, hi_hit;
  always_comb begin
    lo_hit = (k_lo >= less) && (k_lo < less + equal);
    hi_hit = (k_hi >= less) && (k_hi < less + equal);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      n      <= '0;
      i      <= '0;
      j      <= '0;
      less   <= '0;
      equal  <= '0;
      vi     <= '0;
      mn     <= '0;
      mx     <= '0;
      lo_val <= '0;
      hi_val <= '0;
      lo_ok  <= 1'b0;
      hi_ok  <= 1'b0;
      k_lo   <= '0;
      k_hi   <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      stats  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n     <= n_nodes;
          k_lo  <= (n_nodes - 1'b1) >> 1;
          k_hi  <= n_nodes >> 1;
          i     <= '0;
          mn    <= '1;
          mx    <= '0;
          lo_ok <= 1'b0;
          hi_ok <= 1'b0;
          busy  <= 1'b1;
          state <= (n_nodes == '0) ? S_DONE : S_MINMAX;
        end

        S_MINMAX: begin
          if (pr_data < mn) mn <= pr_data;
          if (pr_data > mx) mx <= pr_data;
          if (i == n - 1'b1) begin
            i     <= '0;
            state <= S_LOAD;
          end else begin
            i <= i + 1'b1;
          end
        end

        S_LOAD: begin
          vi    <= pr_data;
          j     <= '0;
          less  <= '0;
          equal <= '0;
          state <= S_COUNT;
        end

        S_COUNT: begin
          if (pr_data < vi)  less  <= less + 1'b1;
          if (pr_data == vi) equal <= equal + 1'b1;
          if (j == n - 1'b1) state <= S_DECIDE;
          else               j     <= j + 1'b1;
        end

        S_DECIDE: begin
          if (lo_hit) begin lo_val <= vi; lo_ok <= 1'b1; end
          if (hi_hit) begin hi_val <= vi; hi_ok <= 1'b1; end
          if (((lo_ok || lo_hit) && (hi_ok || hi_hit)) || i == n - 1'b1) begin
            state <= S_DONE;
          end else begin
            i     <= i + 1'b1;
            state <= S_LOAD;
          end
        end

        S_DONE: begin
          if (n == '0) begin
            stats <= '0;
          end else begin
            stats.min_pr <= mn;
            stats.max_pr <= mx;
            stats.med_pr <= PR_W'(({1'b0, lo_val} + {1'b0, hi_val}) >> 1);
          end
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
