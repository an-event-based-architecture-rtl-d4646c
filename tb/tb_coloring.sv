// tb_coloring: graph colouring on the solver, with the two-variable vertex of the
// prototype, on two graphs: myciel3 (11 vertices, 20 edges, 4 colours) and the 5 x 5
// queen graph (25 vertices, 160 edges, 5 colours).
//
// Each graph vertex is two chip variables, 'main' and 'helper'. For K colours they are
// 4-valued (K = 4, two merged nodes) or 6-valued (K = 5, three merged nodes). Output
// port p of one of them is routed to the other with the word that selects state K+1-p,
// so the pair settles on mirrored states. The colour of a vertex is the port of the
// last event its main variable emitted. Main port p is also routed to every neighbouring
// vertex: to its main variable with the K-bit mask minus bit p-1 ("anything but p") and
// to its helper with the mask minus bit K-p. A variable takes the lowest allowed state,
// so an excluded main jumps to the lowest other colour while its helper jumps to the
// mirror of the lowest, and the pair then races to agree. For K = 4 this is the
// prototype's scheme (exclude-1 goes to words 1110 and 0111); K = 5 with 6-valued
// variables and state 6 never allowed is this testbench's extension of it.
//
// The array is reduced to 16 x 12 nodes (the queen graph needs 150). For each graph the
// system is reset, the graph is built in the testbench (Mycielski construction on a
// 5-cycle; queens attacking along rows, columns and diagonals), links and routes are
// written, and the run goes on until the colours last advertised by the main variables
// form a proper colouring, which must then stay fixed. Every event entering the chip
// must be a routed copy of one that left it, in order. myciel3 (bias 400, the
// prototype's own 4-colour scheme) must be solved. The queen graph runs at bias 100,
// so that the router's serial fan-out (up to 33 copies per event) is not saturated,
// and its outcome is only reported: with the 5-colour extension it has not reached a
// proper colouring within 20 M clocks (about 1900 oscillator periods) here.
module tb_coloring;
  import csp_pkg::*;

  localparam int R = 16, C = 12, NVX = 25;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_link, state_init, lut_we, tgt_we, tready;
  logic [ROW_W-1:0] cfg_row, rd_row;
  logic [COL_W-1:0] cfg_col, rd_col;
  logic [1:0] rd_state;
  logic rd_link;
  logic [BIAS_W-1:0] bias;
  out_addr_t lut_addr, mon_out;
  logic [14:0] lut_base, tgt_addr;
  logic [7:0] lut_count;
  in_addr_t tgt_data, mon_in;
  logic out_fire, in_fire, lost, drop, stall;

  csp_system #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col),
    .cfg_link_i(cfg_link), .state_init_i(state_init), .rd_row_i(rd_row), .rd_col_i(rd_col),
    .rd_state_o(rd_state), .rd_link_o(rd_link), .bias_i(bias), .lut_we_i(lut_we),
    .lut_addr_i(lut_addr), .lut_base_i(lut_base), .lut_count_i(lut_count),
    .tgt_we_i(tgt_we), .tgt_addr_i(tgt_addr), .tgt_data_i(tgt_data),
    .table_ready_o(tready), .mon_out_addr_o(mon_out), .mon_out_fire_o(out_fire),
    .mon_in_addr_o(mon_in), .mon_in_fire_o(in_fire), .lost_o(lost), .drop_o(drop),
    .stall_o(stall));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
      // a broken design fails thousands of checks: stop early instead of running on
      if (failures >= 1000) begin
        $display("too many failures, stopping");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  endtask

  initial begin
    #600000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit adj[NVX][NVX];
  int nedge = 0;
  int main_node[NVX], help_node[NVX];      // leftmost node index r*C+c
  int color[NVX];
  in_addr_t routes[int][$];
  in_addr_t expq[$];
  int n_excl = 0, n_couple = 0, n_in = 0;
  int nv = 0, K = 4;

  function automatic in_addr_t mk(input int node, input int word);
    in_addr_t a;
    a.row = ROW_W'(node / C);
    a.col = COL_W'(node % C);
    a.word = 8'(word);
    return a;
  endfunction

  // output address of port p of the variable based at node n
  function automatic int src(input int n, input int p);
    out_addr_t a;
    a.row = ROW_W'((n + (p - 1) / 2) / C);
    a.col = COL_W'((n + (p - 1) / 2) % C);
    a.port = 1'((p - 1) % 2);
    return int'(a);
  endfunction

  always @(posedge clk) if (rst_n) begin
    check(!drop, "no input address dropped");
    if (in_fire) begin
      n_in++;
      check(expq.size() > 0, "routed event without source");
      if (expq.size() > 0) begin
        in_addr_t e;
        e = expq.pop_front();
        if (mon_in != e && failures < 5) $display("got %h exp %h q=%0d", mon_in, e, expq.size());
        check(mon_in == e, "routed event matches table");
      end
    end
    if (out_fire) begin
      int s;
      s = int'(mon_out);
      if (routes.exists(s)) foreach (routes[s][k]) expq.push_back(routes[s][k]);
      for (int v = 0; v < nv; v++)
        for (int p = 1; p <= K; p++) begin
          if (s == src(main_node[v], p)) begin color[v] = p; if (routes[s].size() > 1) n_excl++; end
          if (s == src(help_node[v], p)) n_couple++;
        end
    end
  end

  function automatic bit proper();
    for (int a = 0; a < nv; a++)
      for (int b = a + 1; b < nv; b++)
        if (adj[a][b] && (color[a] == 0 || color[a] == color[b])) return 0;
    for (int a = 0; a < nv; a++) if (color[a] == 0) return 0;
    return 1;
  endfunction

  task automatic add_edge(input int a, input int b);
    adj[a][b] = 1; adj[b][a] = 1; nedge++;
  endtask

  // one complete run: reset, configure, solve, hold
  task automatic run_graph(input string name, input int per, input int bias_w,
                           input longint max_clk, input bit must_solve);
    longint t0, t;
    bit done;
    int vpr, period;
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk);
    bias = 16'(bias_w);
    period = (1 << 20) / bias_w;              // mean oscillator period in clocks
    vpr = C / per;                            // variables per row
    for (int v = 0; v < nv; v++) begin
      main_node[v] = ((2 * v) / vpr) * C + ((2 * v) % vpr) * per;
      help_node[v] = ((2 * v + 1) / vpr) * C + ((2 * v + 1) % vpr) * per;
      color[v] = 0;
    end
    routes.delete();
    expq.delete();
    n_excl = 0; n_couple = 0; n_in = 0;
    rst_n = 1;
    wait (tready);
    // links: every node of a variable but the first continues it
    for (int n = 0; n < R * C; n++) begin
      @(negedge clk);
      cfg_we = 1; cfg_row = ROW_W'(n / C); cfg_col = COL_W'(n % C);
      cfg_link = ((n % C) < vpr * per) && ((n % C) % per != 0) &&
                 ((n / C) * vpr + (n % C) / per < 2 * nv);
    end
    @(negedge clk); cfg_we = 0;
    // routes
    for (int v = 0; v < nv; v++)
      for (int p = 1; p <= K; p++) begin
        in_addr_t l[$];
        int all;
        l.delete();
        all = (1 << K) - 1;
        l.push_back(mk(help_node[v], 1 << (K - p)));
        for (int u = 0; u < nv; u++)
          if (adj[v][u]) begin
            l.push_back(mk(main_node[u], all ^ (1 << (p - 1))));
            l.push_back(mk(help_node[u], all ^ (1 << (K - p))));
          end
        routes[src(main_node[v], p)] = l;
        routes[src(help_node[v], p)] = '{mk(main_node[v], 1 << (K - p))};
      end
    // the testbench's copy of the table is in place before any routed event: the
    // table is written while every variable is still without a state (no events)
    begin
      int base;
      base = 0;
      foreach (routes[s]) begin
        foreach (routes[s][k]) begin
          @(negedge clk);
          tgt_we = 1; tgt_addr = 15'(base + k); tgt_data = routes[s][k];
        end
        @(negedge clk);
        tgt_we = 0; lut_we = 1; lut_addr = out_addr_t'(s); lut_base = 15'(base);
        lut_count = 8'(routes[s].size());
        base += routes[s].size();
      end
      @(negedge clk); lut_we = 0;
      $display("%s: routing table %0d sources, %0d targets", name, routes.num(), base);
    end
    @(negedge clk); state_init = 1;
    @(negedge clk); state_init = 0;
    t0 = $time;
    done = 0;
    while (!done && ($time - t0) / 10 < max_clk) begin
      @(negedge clk);
      done = proper();
    end
    t = ($time - t0) / 10;
    if (must_solve) check(done, "proper colouring found");
    $display("%s: %s with %0d colours after %0d clocks (about %0d oscillator periods)", name,
             done ? "coloured" : "NOT coloured", K, t, t / period);
    for (int v = 0; v < nv; v++) $write(" %0d", color[v]);
    $display("");
    // a proper colouring is a fixed point: no main variable is excluded from its
    // own colour, so every later event must repeat the same colours
    if (done) begin
      int keep[NVX];
      keep = color;
      repeat (20 * period) begin
        @(negedge clk);
        check(color == keep, "colouring stays fixed");
      end
    end
    check(n_excl > 0 && n_couple > 0, "exclude and coupling events seen");
    $display("%s: exclude events %0d, helper events %0d, routed-in %0d", name, n_excl,
             n_couple, n_in);
  endtask

  initial begin
    cfg_we = 0; cfg_link = 0; cfg_row = '0; cfg_col = '0; state_init = 0; rd_row = '0;
    rd_col = '0; lut_we = 0; tgt_we = 0; lut_addr = '0; lut_base = '0; lut_count = '0;
    tgt_addr = '0; tgt_data = '0; bias = '0;
    // myciel3: u0..u4 = 0..4 (5-cycle), w0..w4 = 5..9, z = 10
    nv = 11; K = 4; nedge = 0;
    foreach (adj[a, b]) adj[a][b] = 0;
    for (int i = 0; i < 5; i++) begin
      add_edge(i, (i + 1) % 5);
      add_edge(5 + i, (i + 1) % 5);
      add_edge(5 + i, (i + 4) % 5);
      add_edge(10, 5 + i);
    end
    check(nedge == 20, "myciel3 has 20 edges");
    run_graph("myciel3", 2, 400, 3000000, 1);
    // 5 x 5 queen graph: squares attack along rows, columns and diagonals
    nv = 25; K = 5; nedge = 0;
    foreach (adj[a, b]) adj[a][b] = 0;
    for (int a = 0; a < 25; a++)
      for (int b = a + 1; b < 25; b++) begin
        int ra, ca, rb, cb;
        ra = a / 5; ca = a % 5; rb = b / 5; cb = b % 5;
        if (ra == rb || ca == cb || ra - ca == rb - cb || ra + ca == rb + cb) add_edge(a, b);
      end
    check(nedge == 160, "queen 5x5 has 160 edges");
    // reported only: this K = 5 extension has not been seen to converge here
    run_graph("queen5x5", 3, 100, 20000000, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
