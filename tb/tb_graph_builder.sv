// tb_graph_builder -- self-checking test of graph_builder.
//
// Random ID streams are fed through the valid/ready port across many windows.
// The testbench keeps its own model of each window's graph (vertices in
// first-seen order, unique edges in first-seen order, degrees, losses) and,
// at every window hand-off, reads the closed bank through the read ports and
// compares counts, degrees and edge list.  Small tables force the vertex-full
// and edge-full paths; one window holds the consumer busy past the next
// window end to force a stretched window (overrun).  The per-message service
// time is checked against n_nodes + n_edges + 4 cycles.
// The graph rules come from the method; the banks, loss counters and
// stretched windows it exercises are this design's own mechanisms.
module tb_graph_builder;
  import ggnb_pkg::*;

  localparam int MAXN = 16;
  localparam int MAXE = 24;
  localparam int WIN  = 1500;
  localparam int NA_W = $clog2(MAXN);
  localparam int EA_W = $clog2(MAXE);

  logic clk = 0, rst_n = 0;
  always #100 clk = ~clk;

  logic             id_valid = 0, id_ready;
  logic [10:0]      id = 0;
  logic             ana_busy = 0, win_closed;
  logic [CNT_W-1:0] rd_nodes, rd_edges;
  logic [NA_W-1:0]  na_addr = 0, nb_addr = 0;
  logic [CNT_W-1:0] na_in_deg, na_out_deg, nb_out_deg;
  logic [EA_W-1:0]  e_addr = 0;
  logic [NA_W-1:0]  e_src, e_dst;
  logic [31:0]      dropped, edges_lost, overrun;

  graph_builder #(.ID_W(11), .MAX_NODES(MAXN), .MAX_EDGES(MAXE), .WINDOW_CYCLES(WIN)) dut (
    .clk, .rst_n, .id_valid, .id_ready, .id, .ana_busy, .win_closed,
    .rd_nodes, .rd_edges, .na_addr, .na_in_deg, .na_out_deg,
    .nb_addr, .nb_out_deg, .e_addr, .e_src, .e_dst,
    .dropped, .edges_lost, .overrun
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model of the window being captured
  int m_ids  [MAXN];
  int m_in   [MAXN];
  int m_out  [MAXN];
  int m_src  [MAXE];
  int m_dst  [MAXE];
  int m_n, m_e, m_prev, m_drop, m_lost;
  bit m_has_prev;

  task automatic model_reset();
    m_n = 0; m_e = 0; m_has_prev = 0;
  endtask

  task automatic model_msg(input int v_id);
    int v, k;
    v = -1;
    for (int q = 0; q < m_n; q++) if (m_ids[q] == v_id) v = q;
    if (v < 0) begin
      if (m_n == MAXN) begin m_drop++; m_has_prev = 0; return; end
      v = m_n; m_ids[v] = v_id; m_in[v] = 0; m_out[v] = 0; m_n++;
    end
    if (m_has_prev) begin
      k = -1;
      for (int q = 0; q < m_e; q++) if (m_src[q] == m_prev && m_dst[q] == v) k = q;
      if (k < 0) begin
        if (m_e == MAXE) m_lost++;
        else begin
          m_src[m_e] = m_prev; m_dst[m_e] = v; m_e++;
          m_out[m_prev]++; m_in[v]++;
        end
      end
    end
    m_prev = v; m_has_prev = 1;
  endtask

  int windows_seen = 0, overruns_forced = 0, stretched_ok = 0;
  int hold_cycles = 0;
  int max_nodes_seen = 0, drops_seen = 0, lost_seen = 0, selfloops = 0;

  task automatic compare_window_snapshot();
    check(rd_nodes == CNT_W'(m_n), $sformatf("window %0d nodes %0d vs %0d", windows_seen, rd_nodes, m_n));
    check(rd_edges == CNT_W'(m_e), $sformatf("window %0d edges %0d vs %0d", windows_seen, rd_edges, m_e));
    for (int q = 0; q < m_n; q++) begin
      na_addr = NA_W'(q); nb_addr = NA_W'(q);
      #1;
      check(na_in_deg == CNT_W'(m_in[q]) && na_out_deg == CNT_W'(m_out[q]) &&
            nb_out_deg == CNT_W'(m_out[q]),
            $sformatf("window %0d vertex %0d degrees in %0d/%0d out %0d/%0d", windows_seen, q,
                      na_in_deg, m_in[q], na_out_deg, m_out[q]));
    end
    for (int q = 0; q < m_e; q++) begin
      e_addr = EA_W'(q);
      #1;
      check(e_src == NA_W'(m_src[q]) && e_dst == NA_W'(m_dst[q]),
            $sformatf("window %0d edge %0d", windows_seen, q));
      if (m_src[q] == m_dst[q]) selfloops++;
    end
    if (m_n > max_nodes_seen) max_nodes_seen = m_n;
  endtask

  // monitor: window hand-off and accepted messages, sampled at the rising edge
  // (the values seen are those before the edge)
  int busy_since = -1, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    bit acc_now, rdy_now, closed;
    int idv;
    acc_now = id_valid && id_ready;
    rdy_now = id_ready;
    closed  = win_closed;
    idv     = int'(id);
    cyc++;
    if (hold_cycles > 0) begin
      hold_cycles--;
      if (hold_cycles == 0) ana_busy <= 0;
    end
    if (closed) begin
      windows_seen++;
      model_reset();
      if (windows_seen == 6) begin
        ana_busy <= 1; hold_cycles = WIN + 300; overruns_forced++;
      end
    end
    if (acc_now) begin
      model_msg(idv);
      busy_since = cyc;
    end else if (rdy_now && busy_since >= 0) begin
      check(cyc - busy_since <= m_n + m_e + 4, $sformatf("message took %0d cycles", cyc - busy_since));
      busy_since = -1;
    end
  end

  // the closed bank is compared right after each hand-off, off the clock edge,
  // before the monitor starts the model of the next window
  always @(negedge clk) if (rst_n && win_closed) compare_window_snapshot();

  // stimulus
  int pool;
  initial begin
    m_drop = 0; m_lost = 0;
    model_reset();
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (windows_seen < 14) begin
      // the pool size varies by window: small (self-loops, repeats) to large (table full)
      pool = (windows_seen % 4 == 0) ? 3 : (windows_seen % 4 == 1) ? 40 : 12;
      id_valid = 1;
      id       = 11'($urandom_range(pool - 1) * 37 + 5);
      forever begin
        if (id_ready) begin @(negedge clk); break; end
        @(negedge clk);
      end
      id_valid = 0;
      repeat ($urandom_range(20)) @(negedge clk);
    end
    check(dropped == 32'(m_drop), $sformatf("dropped %0d vs %0d", dropped, m_drop));
    check(edges_lost == 32'(m_lost), $sformatf("edges_lost %0d vs %0d", edges_lost, m_lost));
    check(overrun == 32'(overruns_forced), $sformatf("overrun %0d vs %0d", overrun, overruns_forced));
    check(m_drop > 0, "vertex-full path never taken");
    check(m_lost > 0, "edge-full path never taken");
    check(selfloops > 0, "no self-loop seen");
    $display("windows=%0d dropped=%0d edges_lost=%0d overrun=%0d selfloops=%0d max_nodes=%0d",
             windows_seen, dropped, edges_lost, overrun, selfloops, max_nodes_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
