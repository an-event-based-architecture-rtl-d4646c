// tb_aer_out_if: self-checking test of the output AER interface.
//
// The testbench plays the node array (4 x 4): nodes raise requests with a port bit at
// random and drop them when acknowledged; it also plays the off-chip receiver, which
// takes words with a random ready. Every acknowledge must name a requesting node, at
// most one per clock; every word taken from the bus must be the {row, col, port} of the
// node acknowledged for it, in order; no request may wait longer than the number of
// nodes in transfers (round robin); with ready always high one word
// must leave per clock while requests are waiting.
module tb_aer_out_if;
  import csp_pkg::*;

  localparam int R = 4, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [R-1:0][C-1:0] req, port, ack;
  out_addr_t addr;
  logic valid, ready, stall;

  aer_out_if #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .req_i(req), .port_i(port), .ack_o(ack), .aer_addr_o(addr),
    .aer_valid_o(valid), .aer_ready_i(ready), .stall_o(stall));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  out_addr_t expq[$];
  int wait_t[R][C];
  bit granted;
  int max_wait = 0, n_words = 0, n_stall = 0, phase = 0, full_rate_ok = 0;

  // sample on the rising edge, update requests after it
  always @(posedge clk) if (rst_n) begin
    out_addr_t a;
    if (valid && ready) begin
      n_words++;
      check(expq.size() > 0, "word without acknowledge");
      if (expq.size() > 0) begin
        a = expq.pop_front();
        check(addr == a, $sformatf("bus word %h expected %h", addr, a));
      end
    end
    check($countones(ack) <= 1, "at most one acknowledge per clock");
    check((ack & ~req) == '0, "acknowledge only to a requesting node");
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (ack[r][c]) begin
          a.row = ROW_W'(r); a.col = COL_W'(c); a.port = port[r][c];
          expq.push_back(a);
        end
    if (stall) n_stall++;
    // full-rate phase: ready always high and requests waiting -> a word per clock
    if (phase == 1 && req != '0 && valid) full_rate_ok++;
  end

  initial begin
    req = '0; port = '0; ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(posedge clk);
      granted = (ack != '0);
      #1;
      phase = (t >= 15000) ? 1 : 0;
      ready = phase ? 1'b1 : 1'($urandom_range(3) != 0);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          if (req[r][c]) begin
            if (granted) wait_t[r][c]++;
            if (wait_t[r][c] > max_wait) max_wait = wait_t[r][c];
          end else if ($urandom_range(7) == 0) begin
            req[r][c] = 1'b1;
            port[r][c] = 1'($urandom_range(1));
            wait_t[r][c] = 0;
          end
        end
    end
    repeat (5) @(posedge clk);
    check(n_words > 5000, $sformatf("enough words (%0d)", n_words));
    check(n_stall > 0, "stalls seen with a slow receiver");
    check(max_wait <= R * C, $sformatf("round robin bound, max wait %0d transfers", max_wait));
    check(full_rate_ok > 4000, "one word per clock at full rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // nodes drop a request on the clock edge where it is acknowledged
  always @(posedge clk) begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (ack[r][c]) req[r][c] <= 1'b0;
  end
endmodule
