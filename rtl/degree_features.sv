// degree_features -- structural features of a window's CAN-ID graph.
//
// Produces the six graph-property features of the method: number of vertices,
// number of edges, and the maximum and minimum in-degree and out-degree over
// all vertices.  Vertex and edge counts come straight from the graph builder;
// the degree extremes are found by one sequential scan of the vertex table
// (n_nodes cycles, plus one to finish).  An empty graph gives all zeros.
//
// Interface.  `start` with n_nodes/n_edges; the block reads degrees through
// the combinational na_addr/na_in_deg/na_out_deg port; `done` pulses with
// `feat` valid (held until the next start).
module degree_features
  import ggnb_pkg::*;
#(
  parameter int MAX_NODES = 512,
  localparam int NA_W = $clog2(MAX_NODES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] n_nodes,
  input  logic [CNT_W-1:0] n_edges,
  output logic [NA_W-1:0]  na_addr,
  input  logic [CNT_W-1:0] na_in_deg,
  input  logic [CNT_W-1:0] na_out_deg,
  output logic             busy,
  output logic             done,
  output degree_features_t feat
);

  logic [CNT_W-1:0] n, e_n, i;
  logic [CNT_W-1:0] max_in, max_out, min_in, min_out;
  logic             scanning, finish;

  assign na_addr = NA_W'(i);
  assign busy    = scanning || finish;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n        <= '0;
      e_n      <= '0;
      i        <= '0;
      max_in   <= '0;
      max_out  <= '0;
      min_in   <= '0;
      min_out  <= '0;
      scanning <= 1'b0;
      finish   <= 1'b0;
      done     <= 1'b0;
      feat     <= '0;
    end else begin
      done   <= 1'b0;
      finish <= 1'b0;
      if (start && !busy) begin
        n        <= n_nodes;
        e_n      <= n_edges;
        i        <= '0;
        max_in   <= '0;
        max_out  <= '0;
        min_in   <= '1;
        min_out  <= '1;
        scanning <= (n_nodes != '0);
        finish   <= (n_nodes == '0);
      end else if (scanning) begin
        if (na_in_deg  > max_in)  max_in  <= na_in_deg;
        if (na_out_deg > max_out) max_out <= na_out_deg;
        if (na_in_deg  < min_in)  min_in  <= na_in_deg;
        if (na_out_deg < min_out) min_out <= na_out_deg;
        if (i == n - 1'b1) begin
          scanning <= 1'b0;
          finish   <= 1'b1;
        end else begin
          i <= i + 1'b1;
        end
      end else if (finish) begin
        feat.nodes   <= n;
        feat.edges   <= e_n;
        feat.max_in  <= max_in;
        feat.max_out <= max_out;
        feat.min_in  <= (n == '0) ? '0 : min_in;
        feat.min_out <= (n == '0) ? '0 : min_out;
        done         <= 1'b1;
      end
    end
  end

endmodule
