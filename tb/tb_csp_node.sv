// tb_csp_node: self-checking test of one node's logic.
//
// Part 1: a stand-alone binary node (link = 0) gets random input-port words (1..3) and
// oscillator spikes; its state must follow f_hw for a 2-valued variable, each spike must
// raise a request on the port of the state held before the spike, one clock later, and
// an acknowledge must clear it. A second spike before the acknowledge must flag a lost
// event.
// Part 2: the node is placed in the middle of a merged variable (link = 1) with random
// carry inputs from its neighbours; its state and carry outputs must match what the
// whole-variable rule requires: keep the state if any node of the variable holds an
// allowed state, otherwise go to the lowest allowed state, which is in this node only if
// no node to its left has an allowed bit.
module tb_csp_node;
  import csp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic link, init, ev_base, ev_l, seen_l, keep_l, osc_l, keep_r, any_r, osc, ack;
  logic [1:0] word, state;
  logic ev_o, seen_o, keep_l_o, osc_o, keep_r_o, any_r_o, req, port, lost;

  csp_node dut (
    .clk, .rst_n, .link_i(link), .state_init_i(init), .ev_base_i(ev_base),
    .ev_word_i(word), .ev_l_i(ev_l), .seen_l_i(seen_l), .keep_l_i(keep_l),
    .osc_l_i(osc_l), .keep_r_i(keep_r), .any_r_i(any_r), .ev_o, .seen_o, .keep_l_o,
    .osc_o, .keep_r_o, .any_r_o, .osc_i(osc), .req_o(req), .port_o(port), .ack_i(ack),
    .lost_o(lost), .state_o(state));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic quiet();
    init = 0; ev_base = 0; word = 0; ev_l = 0; seen_l = 0; keep_l = 0; osc_l = 0;
    keep_r = 0; any_r = 0; osc = 0; ack = 0;
  endtask

  initial begin
    int s, pre, n_emit;
    link = 0;
    quiet();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == 2'b00 && !req, "reset: no state, no request");
    init = 1;
    @(negedge clk);
    quiet();
    check(state == 2'b01, "state_init gives state 1");
    s = 1;
    n_emit = 0;

    // Part 1: stand-alone binary node
    for (int it = 0; it < 2000; it++) begin
      bit do_ev, do_osc;
      do_ev  = 1'($urandom_range(1));
      do_osc = 1'($urandom_range(1));
      pre = s;
      @(negedge clk);
      quiet();
      if (do_ev) begin
        ev_base = 1;
        word = 2'($urandom_range(3, 1));
        s = f_hw(word, s, 2);
      end
      osc = do_osc;
      // the osc_l / ev_l chain inputs must be ignored by a base node
      ev_l = 1'($urandom_range(1));
      osc_l = 1'($urandom_range(1));
      #1;
      check(ev_o == do_ev && osc_o == do_osc, "chain outputs of base node");
      @(negedge clk);
      quiet();
      check(state == ((s == 1) ? 2'b01 : 2'b10), $sformatf("state %0d", s));
      if (do_osc) begin
        n_emit++;
        check(req && port == 1'(pre - 1), "emit on port of the pre-event state");
        ack = 1;
        @(negedge clk);
        quiet();
      end
      check(!req, "request idle");
    end
    check(n_emit > 500, "enough spikes");

    // lost event
    @(negedge clk); osc = 1;
    @(negedge clk); osc = 1;
    @(negedge clk); quiet();
    check(lost && req, "second spike without ack is flagged lost");
    ack = 1;
    @(negedge clk); quiet();
    check(!req && !lost, "ack clears request");

    // Part 2: node inside a merged variable
    link = 1;
    for (int it = 0; it < 2000; it++) begin
      logic [1:0] cur, exp;
      logic hit, mine_keep, anyall;
      @(negedge clk);
      quiet();
      cur = state;
      ev_l   = 1'($urandom_range(1));
      ev_base = 1'($urandom_range(1));       // ignored when link = 1
      word   = 2'($urandom_range(3));
      seen_l = 1'($urandom_range(1));
      keep_l = 1'($urandom_range(1));
      keep_r = 1'($urandom_range(1));
      any_r  = 1'($urandom_range(1));
      if (it % 97 == 0) begin init = 1; end
      hit = ev_l;
      mine_keep = |(word & cur);
      anyall = seen_l | (|word) | any_r;
      exp = cur;
      if (init) exp = 2'b00;
      else if (hit && anyall && !(keep_l | mine_keep | keep_r)) begin
        if (seen_l)       exp = 2'b00;
        else if (word[0]) exp = 2'b01;
        else if (word[1]) exp = 2'b10;
        else              exp = 2'b00;
      end
      #1;
      check(ev_o == hit, "ev_o follows the chain");
      check(seen_o == (hit & (seen_l | (|word))), "seen_o");
      check(keep_l_o == (hit & (keep_l | mine_keep)), "keep_l_o");
      check(keep_r_o == (hit & (keep_r | mine_keep)), "keep_r_o");
      check(any_r_o == (hit & (any_r | (|word))), "any_r_o");
      @(negedge clk);
      quiet();
      check(state == exp, $sformatf("merged state %b exp %b", state, exp));
      // force a state now and then so that both bits get exercised
      if (it % 5 == 0) begin
        @(negedge clk);
        ev_l = 1; word = 2'($urandom_range(2, 1)); seen_l = 0; keep_l = 0; keep_r = 0; any_r = 0;
        exp = word;
        @(negedge clk);
        quiet();
        check(state == exp, "lowest allowed bit taken when nothing to the left");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
