// tb_csp_system: end-to-end test of the solver at its full size (64 x 32 nodes),
// solving 3-SAT problems with the clause/variable mapping of the prototype.
//
// Mapping (one binary node per variable, one 4-valued variable = two merged nodes per
// clause): output port 1 of a variable means "false", port 2 "true". The port that
// makes literal k of a clause true is routed to the clause's input word 1000 (go to
// state 4, fulfilled); the other port to word 1000 | bit k-1 (state k unless already
// fulfilled). Clause output port k (k = 1..3) is routed to literal k's variable with the
// word that makes the literal true, and to word 1000 of every other clause holding the
// same literal. Clause output port 4 is routed back to the clause with word 0100
// (state 3), so a clause must be re-fulfilled in every one of its own cycles.
//
// Steps: (1) run with an empty routing table and measure every node's oscillator rate
// from its output events; (2) place clauses on the slowest adjacent node pairs and
// variables on the fastest remaining nodes, write the merge links and the routing
// table; (3) run until the values the variables last advertised satisfy every clause.
// This is done for the two-clause example C1 = (L1 | L2 | ~L3), C2 = (L2 | L3 | L4)
// and then for a random 3-SAT instance with a planted solution (NV variables, NC
// clauses). Throughout, every event entering the chip must be one of the routed copies
// of an event that left it, in order. The test counts the mechanisms it relies on:
// merged-variable events, fan-out > 1, dropped (unrouted) sources, clause self-reset
// events, clause-forced variable updates, output-bus stalls behind the router, lost
// events; each must occur at least once.
module tb_csp_system;
  import csp_pkg::*;

  localparam int NV = 20, NC = 85;          // random instance (clause/variable ratio of the paper's 50/218)
  localparam int BIAS = 100;                // mean oscillator period about 2^20/100 = 10.5k clocks
  localparam int MAXC = 256;

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

  csp_system dut (
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

  localparam longint WATCHDOG = 64'd200_000_000;  // clocks x 10
  initial begin
    #(WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- problem and placement ----------------
  int nv, nc;
  int lit_v[MAXC][3];          // variable index of literal k
  bit lit_pos[MAXC][3];        // literal k is positive
  int var_node[64];            // node index r*32+c of each variable
  int cl_node[MAXC];           // node index of each clause's leftmost node
  int node_var[2048], node_cl[2048];
  bit cur_val[64];             // last advertised value of each variable
  bit cur_known[64];

  // routing table built by the testbench (pend) and the part already in the router (routes)
  in_addr_t pend[int][$];
  in_addr_t routes[int][$];

  // measured rates
  longint first_t[2048], last_t[2048];
  int cnt[2048];
  bit measuring = 0;
  longint cyc = 0;

  // mechanism counters
  int n_merged = 0, n_fanout = 0, n_dropsrc = 0, n_selfreset = 0, n_forced = 0;
  int n_stall = 0, n_lost = 0, n_in = 0;

  in_addr_t expq[$];

  function automatic in_addr_t mk(input int node, input int word);
    in_addr_t a;
    a.row = ROW_W'(node / 32);
    a.col = COL_W'(node % 32);
    a.word = 8'(word);
    return a;
  endfunction

  function automatic int src_of(input out_addr_t a);
    return int'(a);
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (stall) n_stall++;
      if (lost) n_lost++;
      check(!drop, "no input address dropped");
      if (in_fire) begin
        n_in++;
        check(expq.size() > 0, "routed event without source");
        if (expq.size() > 0) check(mon_in == expq.pop_front(), "routed event matches table");
      end
      if (out_fire) begin
        int node, s;
        node = int'(mon_out.row) * 32 + int'(mon_out.col);
        s = src_of(mon_out);
        if (measuring) begin
          if (cnt[node] == 0) first_t[node] = cyc;
          last_t[node] = cyc;
          cnt[node]++;
        end
        if (routes.exists(s)) begin
          foreach (routes[s][k]) expq.push_back(routes[s][k]);
          if (routes[s].size() > 1) n_fanout++;
        end else n_dropsrc++;
        if (node_var[node] >= 0) begin
          cur_val[node_var[node]] = mon_out.port;   // port 2 (bit 1) = true
          cur_known[node_var[node]] = 1;
        end else begin
          int cl, k;
          // events of a clause come from its first or second node
          cl = (node_cl[node] >= 0) ? node_cl[node] : -1;
          if (cl >= 0) begin
            n_merged++;
            k = 2 * (node - cl_node[cl]) + int'(mon_out.port) + 1;
            if (k == 4) n_selfreset++;
            else n_forced++;
          end
        end
      end
    end
  end

  function automatic bit all_sat();
    for (int c = 0; c < nc; c++) begin
      bit s;
      s = 0;
      for (int k = 0; k < 3; k++)
        if (cur_known[lit_v[c][k]] && cur_val[lit_v[c][k]] == lit_pos[c][k]) s = 1;
      if (!s) return 0;
    end
    return 1;
  endfunction

  task automatic measure_rates(input int clocks);
    for (int n = 0; n < 2048; n++) cnt[n] = 0;
    measuring = 1;
    repeat (clocks) @(negedge clk);
    measuring = 0;
  endtask

  function automatic real rate(input int n);
    if (cnt[n] < 2) return 0.0;
    return real'(cnt[n] - 1) / real'(last_t[n] - first_t[n]);
  endfunction

  task automatic place_and_route();
    bit used[2048];
    int order[$];
    for (int n = 0; n < 2048; n++) begin used[n] = 0; node_var[n] = -1; node_cl[n] = -1; end
    // clauses: slowest leaders among even-column pairs
    for (int n = 0; n < 2048; n += 2) order.push_back(n);
    order.sort() with (rate(item));
    for (int c = 0; c < nc; c++) begin
      cl_node[c] = order[c];
      used[order[c]] = 1; used[order[c] + 1] = 1;
      node_cl[order[c]] = c; node_cl[order[c] + 1] = c;
    end
    // variables: fastest free nodes
    order.delete();
    for (int n = 0; n < 2048; n++) if (!used[n]) order.push_back(n);
    order.rsort() with (rate(item));
    for (int v = 0; v < nv; v++) begin
      var_node[v] = order[v];
      node_var[order[v]] = v;
      cur_known[v] = 0;
    end
    // merge links: the right node of every clause pair continues the clause
    for (int n = 0; n < 2048; n++) begin
      @(negedge clk);
      cfg_we = 1; cfg_row = ROW_W'(n / 32); cfg_col = COL_W'(n % 32);
      cfg_link = (node_cl[n] >= 0) && (n == cl_node[node_cl[n]] + 1);
    end
    @(negedge clk); cfg_we = 0;
    // routing table
    pend.delete();
    for (int c = 0; c < nc; c++) begin
      for (int k = 0; k < 3; k++) begin
        int v, fp, op;
        v = lit_v[c][k];
        // variable ports: port bit 1 = true
        fp = var_node[v] * 2 + (lit_pos[c][k] ? 1 : 0);
        op = var_node[v] * 2 + (lit_pos[c][k] ? 0 : 1);
        pend[fp].push_back(mk(cl_node[c], 8'b1000));
        pend[op].push_back(mk(cl_node[c], 8'b1000 | (1 << k)));
        // clause port k+1 forces the literal true ...
        begin
          int sp;
          sp = (cl_node[c] + k / 2) * 2 + (k % 2);
          pend[sp].push_back(mk(var_node[v], lit_pos[c][k] ? 2'b10 : 2'b01));
          // ... and fulfils the other clauses holding the same literal
          for (int c2 = 0; c2 < nc; c2++)
            if (c2 != c)
              for (int k2 = 0; k2 < 3; k2++)
                if (lit_v[c2][k2] == v && lit_pos[c2][k2] == lit_pos[c][k])
                  pend[sp].push_back(mk(cl_node[c2], 8'b1000));
        end
      end
      // clause port 4 resets the clause to state 3
      pend[(cl_node[c] + 1) * 2 + 1].push_back(mk(cl_node[c], 8'b0100));
    end
    // write the targets, then the lookup entries
    // (the testbench's copy of an entry becomes active on the clock after its write)
    begin
      int base;
      base = 0;
      foreach (pend[s]) begin
        foreach (pend[s][k]) begin
          @(negedge clk);
          tgt_we = 1; tgt_addr = 15'(base + k); tgt_data = pend[s][k];
        end
        @(negedge clk);
        tgt_we = 0; lut_we = 1; lut_addr = out_addr_t'(s); lut_base = 15'(base);
        lut_count = 8'(pend[s].size());
        @(negedge clk);
        lut_we = 0;
        routes[s] = pend[s];
        base += pend[s].size();
      end
      $display("routing table: %0d sources, %0d targets", routes.num(), base);
    end
  endtask

  task automatic clear_table();
    int srcs[$];
    foreach (routes[s]) srcs.push_back(s);
    foreach (srcs[i]) begin
      @(negedge clk);
      lut_we = 1; lut_addr = out_addr_t'(srcs[i]); lut_count = 0; lut_base = 0;
      @(negedge clk);
      lut_we = 0;
      routes.delete(srcs[i]);
    end
    wait (expq.size() == 0);
    repeat (4) @(negedge clk);
  endtask

  task automatic run_solver(input string name, input longint max_clocks, output longint took);
    longint t0;
    bit done;
    // fresh start: every variable to its state 1 (false), clauses to state 1
    wait (expq.size() == 0);
    @(negedge clk); state_init = 1;
    @(negedge clk); state_init = 0;
    for (int v = 0; v < nv; v++) cur_known[v] = 0;
    t0 = cyc;
    done = 0;
    while (!done && cyc - t0 < max_clocks) begin
      @(negedge clk);
      done = all_sat();
    end
    took = cyc - t0;
    check(done, $sformatf("%s: solution found (%0d clocks)", name, took));
    $display("%s: %s after %0d clocks", name, done ? "solved" : "NOT solved", took);
  endtask

  bit plant[64];

  initial begin
    longint took;
    cfg_we = 0; cfg_link = 0; cfg_row = '0; cfg_col = '0; state_init = 0; rd_row = '0;
    rd_col = '0; lut_we = 0; tgt_we = 0; lut_addr = '0; lut_base = '0; lut_count = '0;
    tgt_addr = '0; tgt_data = '0;
    bias = 16'(BIAS);
    nv = 0; nc = 0;
    for (int n = 0; n < 2048; n++) begin node_var[n] = -1; node_cl[n] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (tready);
    @(negedge clk); state_init = 1;
    @(negedge clk); state_init = 0;
    // (1) oscillator rates, from the advertised states of all 2048 nodes
    measure_rates(4 * (1 << 20) / BIAS);
    begin
      real lo, hi, sum;
      int nmeas;
      lo = 1.0; hi = 0.0; sum = 0.0; nmeas = 0;
      for (int n = 0; n < 2048; n++) if (cnt[n] >= 2) begin
        nmeas++;
        sum += rate(n);
        if (rate(n) < lo) lo = rate(n);
        if (rate(n) > hi) hi = rate(n);
      end
      check(nmeas == 2048, $sformatf("all oscillators measured (%0d)", nmeas));
      $display("oscillator periods: %0.0f .. %0.0f clocks, mean rate %g", 1.0 / hi, 1.0 / lo, sum / nmeas);
      check(hi / lo > 1.2, "oscillator rates are spread by mismatch");
    end

    // (2,3) the two-clause example of the paper
    nv = 4; nc = 2;
    lit_v[0] = '{0, 1, 2}; lit_pos[0] = '{1, 1, 0};   // C1 = L1 | L2 | ~L3
    lit_v[1] = '{1, 2, 3}; lit_pos[1] = '{1, 1, 1};   // C2 = L2 | L3 | L4
    place_and_route();
    run_solver("example C1&C2", 64'd40 * (1 << 20) / BIAS, took);
    clear_table();

    // random instance with a planted solution
    nv = NV; nc = NC;
    for (int v = 0; v < nv; v++) plant[v] = 1'($urandom_range(1));
    for (int c = 0; c < nc; c++) begin
      bit ok;
      do begin
        lit_v[c][0] = $urandom_range(nv - 1);
        do lit_v[c][1] = $urandom_range(nv - 1); while (lit_v[c][1] == lit_v[c][0]);
        do lit_v[c][2] = $urandom_range(nv - 1);
        while (lit_v[c][2] == lit_v[c][0] || lit_v[c][2] == lit_v[c][1]);
        ok = 0;
        for (int k = 0; k < 3; k++) begin
          lit_pos[c][k] = 1'($urandom_range(1));
          if (lit_pos[c][k] == plant[lit_v[c][k]]) ok = 1;
        end
      end while (!ok);
    end
    place_and_route();
    run_solver($sformatf("random 3-SAT %0d/%0d", NV, NC), 64'd400 * (1 << 20) / BIAS, took);

    check(n_merged > 0, "merged-variable (clause) events");
    check(n_fanout > 0, "events with fan-out > 1");
    check(n_dropsrc > 0, "unrouted sources dropped by the router");
    check(n_selfreset > 0, "clause self-reset events");
    check(n_forced > 0, "clause-forced variable updates");
    check(n_stall > 0, "output bus stalled behind the router");
    $display("mechanisms: merged %0d fanout %0d dropped %0d selfreset %0d forced %0d stall %0d lost %0d routed-in %0d",
             n_merged, n_fanout, n_dropsrc, n_selfreset, n_forced, n_stall, n_lost, n_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
