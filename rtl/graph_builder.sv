// graph_builder -- builds one directed CAN-ID graph per time window.
//
// Every received arbitration ID is a vertex; an edge u->v is added when a
// message with ID v directly follows a message with ID u in the same window.
// The graph is simple: a repeated pair adds no second edge, and a repeated ID
// gives a self-loop.  This matches the method's description ("the CAN message
// IDs act as vertices, and an edge is constructed between two vertices
// depending on their sequence") and its PageRank example graphs.
//
// How it works.  The graph lives in two banks.  Messages are written into the
// capture bank while the other, closed bank is read by the feature engines.
// Per message the builder searches the capture bank's vertex table linearly
// for the ID (allocating a vertex if it is new), then searches the edge list
// for the pair (previous vertex, this vertex) and appends it if new, counting
// it in the source's out-degree and the destination's in-degree.  A message
// therefore takes at most n_nodes + n_edges + 3 cycles; at the assumed
// 100 MHz clock and 1 Mbit/s CAN (one frame every >= 47 us) that is far below
// the frame spacing with the default tables.  Tables sized for much longer
// windows (thousands of entries) can exceed it on a saturated bus, and
// id_ready then holds the sender back.
//
// Window.  A cycle counter closes the capture bank every WINDOW_CYCLES cycles
// (23 ms by default, the window size of the method).  The banks swap between
// two messages and only when the consumer is idle (ana_busy low); if the
// consumer is still busy the window is stretched and `overrun` is counted.
// After the swap `win_closed` pulses for one cycle and the closed bank's
// counts and read ports are valid until the next swap.  The first message of a
// window has no predecessor, so no edge crosses a window boundary.
//
// Interface.  id_valid/id_ready/id is a valid/ready stream of received IDs.
// Three combinational read ports serve the closed bank: node port A (degrees),
// node port B (out-degree) and the edge port (source and destination vertex).
// Messages that find the vertex table full are dropped and counted in
// `dropped`; a new edge that finds the edge list full is not stored and is
// counted in `edges_lost`.
module graph_builder
  import ggnb_pkg::*;
#(
  parameter int ID_W          = 11,          // CAN 2.0A standard identifier
  parameter int MAX_NODES     = 512,
  parameter int MAX_EDGES     = 512,
  parameter int WINDOW_CYCLES = 2_300_000,   // 23 ms at 100 MHz
  localparam int NA_W = $clog2(MAX_NODES),
  localparam int EA_W = $clog2(MAX_EDGES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // received-ID stream
  input  logic             id_valid,
  output logic             id_ready,
  input  logic [ID_W-1:0]  id,
  // window hand-off
  input  logic             ana_busy,
  output logic             win_closed,
  output logic [CNT_W-1:0] rd_nodes,
  output logic [CNT_W-1:0] rd_edges,
  // closed-bank read ports (combinational)
  input  logic [NA_W-1:0]  na_addr,
  output logic [CNT_W-1:0] na_in_deg,
  output logic [CNT_W-1:0] na_out_deg,
  input  logic [NA_W-1:0]  nb_addr,
  output logic [CNT_W-1:0] nb_out_deg,
  input  logic [EA_W-1:0]  e_addr,
  output logic [NA_W-1:0]  e_src,
  output logic [NA_W-1:0]  e_dst,
  // statistics
  output logic [31:0]      dropped,
  output logic [31:0]      edges_lost,
  output logic [31:0]      overrun
);

  typedef enum logic [2:0] {S_IDLE, S_NSEARCH, S_EDGE, S_ESEARCH} state_e;

  // Two banks: [bank][index]
  logic [ID_W-1:0]  node_id  [2][MAX_NODES];
  logic [CNT_W-1:0] in_deg   [2][MAX_NODES];
  logic [CNT_W-1:0] out_deg  [2][MAX_NODES];
  logic [NA_W-1:0]  edge_src [2][MAX_EDGES];
  logic [NA_W-1:0]  edge_dst [2][MAX_EDGES];
  logic [CNT_W-1:0] n_nodes  [2];
  logic [CNT_W-1:0] n_edges  [2];

  state_e           state;
  logic             wb;          // capture bank
  logic [ID_W-1:0]  cur_id;
  logic [CNT_W-1:0] idx;
  logic [NA_W-1:0]  cur_node;
  logic [NA_W-1:0]  prev_node;
  logic             has_prev;
  logic             new_node;
  logic [31:0]      win_cnt;
  logic             win_due;

  wire rb = ~wb;

  assign id_ready  = (state == S_IDLE) && !(win_due && !ana_busy);
  assign rd_nodes  = n_nodes[rb];
  assign rd_edges  = n_edges[rb];
  assign na_in_deg  = in_deg[rb][na_addr];
  assign na_out_deg = out_deg[rb][na_addr];
  assign nb_out_deg = out_deg[rb][nb_addr];
  assign e_src      = edge_src[rb][e_addr];
  assign e_dst      = edge_dst[rb][e_addr];

  // Window timer: restarts when the banks swap.
  wire swap = (state == S_IDLE) && win_due && !ana_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_cnt <= '0;
      win_due <= 1'b0;
      overrun <= '0;
    end else if (swap) begin
      win_cnt <= '0;
      win_due <= 1'b0;
    end else if (!win_due && win_cnt == 32'(WINDOW_CYCLES - 1)) begin
      win_due <= 1'b1;
      if (ana_busy) overrun <= overrun + 1'b1;  // this window will be stretched
    end else if (!win_due) begin
      win_cnt <= win_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      wb         <= 1'b0;
      n_nodes[0] <= '0;
      n_nodes[1] <= '0;
      n_edges[0] <= '0;
      n_edges[1] <= '0;
      has_prev   <= 1'b0;
      prev_node  <= '0;
      cur_node   <= '0;
      cur_id     <= '0;
      idx        <= '0;
      new_node   <= 1'b0;
      win_closed <= 1'b0;
      dropped    <= '0;
      edges_lost <= '0;
    end else begin
      win_closed <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (swap) begin
            wb          <= ~wb;
            n_nodes[rb] <= '0;        // the old closed bank becomes the capture bank
            n_edges[rb] <= '0;
            has_prev    <= 1'b0;
            win_closed  <= 1'b1;
          end else if (id_valid) begin
            cur_id <= id;
            idx    <= '0;
            state  <= S_NSEARCH;
          end
        end

        // Linear search of the vertex table; allocate on a miss.
        S_NSEARCH: begin
          if (idx == n_nodes[wb]) begin
            if (n_nodes[wb] == CNT_W'(MAX_NODES)) begin
              dropped  <= dropped + 1'b1;
              has_prev <= 1'b0;       // the next message does not follow this one's predecessor
              state    <= S_IDLE;
            end else begin
              node_id[wb][NA_W'(idx)] <= cur_id;
              in_deg[wb][NA_W'(idx)]  <= '0;
              out_deg[wb][NA_W'(idx)] <= '0;
              n_nodes[wb]             <= n_nodes[wb] + 1'b1;
              cur_node                <= NA_W'(idx);
              new_node                <= 1'b1;
              state                   <= S_EDGE;
            end
          end else if (node_id[wb][NA_W'(idx)] == cur_id) begin
            cur_node <= NA_W'(idx);
            new_node <= 1'b0;
            state    <= S_EDGE;
          end else begin
            idx <= idx + 1'b1;
          end
        end

        // Decide whether an edge has to be looked up.
        S_EDGE: begin
          idx <= '0;
          if (!has_prev) begin
            has_prev  <= 1'b1;
            prev_node <= cur_node;
            state     <= S_IDLE;
          end else if (new_node) begin
            idx   <= n_edges[wb];     // a new vertex has no edges: skip the search
            state <= S_ESEARCH;
          end else begin
            state <= S_ESEARCH;
          end
        end

        // Linear search of the edge list; append on a miss.
        S_ESEARCH: begin
          if (idx == n_edges[wb]) begin
            if (n_edges[wb] == CNT_W'(MAX_EDGES)) begin
              edges_lost <= edges_lost + 1'b1;
            end else begin
              edge_src[wb][EA_W'(idx)] <= prev_node;
              edge_dst[wb][EA_W'(idx)] <= cur_node;
              n_edges[wb]              <= n_edges[wb] + 1'b1;
              out_deg[wb][prev_node]   <= out_deg[wb][prev_node] + 1'b1;
              in_deg[wb][cur_node]     <= in_deg[wb][cur_node] + 1'b1;
            end
            prev_node <= cur_node;
            state     <= S_IDLE;
          end else if (edge_src[wb][EA_W'(idx)] == prev_node &&
                       edge_dst[wb][EA_W'(idx)] == cur_node) begin
            prev_node <= cur_node;
            state     <= S_IDLE;
          end else begin
            idx <= idx + 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // The capture side never holds more than the tables can address.
  assert property (@(posedge clk) disable iff (!rst_n) n_nodes[wb] <= CNT_W'(MAX_NODES));
  assert property (@(posedge clk) disable iff (!rst_n) n_edges[wb] <= CNT_W'(MAX_EDGES));

endmodule
