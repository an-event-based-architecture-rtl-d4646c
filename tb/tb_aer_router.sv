// tb_aer_router: self-checking test of the event router.
//
// After the reset-time table clear, a random table is written: 40 sources with fan-outs
// of 0 to 6 targets each, in a 256-entry target memory. Random source events (programmed
// and unprogrammed) are offered with a random valid, and the target side takes words
// with a random ready. The words leaving the router must be exactly the programmed
// targets of the accepted sources, in table order; unprogrammed sources and fan-out 0
// must produce nothing. In a second phase with both sides always ready the router must
// accept a new source every 1 + F clocks (F = fan-out of the previous one, 1 clock for
// F = 0).
module tb_aer_router;
  import csp_pkg::*;

  localparam int TD = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lut_we, tgt_we, src_valid, src_ready, dst_valid, dst_ready, tready;
  out_addr_t lut_addr, src;
  logic [7:0] lut_base, tgt_addr;
  logic [7:0] lut_count;
  in_addr_t tgt_data, dst;

  aer_router #(.TGT_DEPTH(TD)) dut (
    .clk, .rst_n, .lut_we_i(lut_we), .lut_addr_i(lut_addr), .lut_base_i(lut_base),
    .lut_count_i(lut_count), .tgt_we_i(tgt_we), .tgt_addr_i(tgt_addr), .tgt_data_i(tgt_data),
    .src_addr_i(src), .src_valid_i(src_valid), .src_ready_o(src_ready),
    .dst_addr_o(dst), .dst_valid_o(dst_valid), .dst_ready_i(dst_ready),
    .table_ready_o(tready));

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

  out_addr_t srcs[40];
  int        fan[40], base[40];
  in_addr_t  tgts[TD];
  in_addr_t  expq[$];
  int n_out = 0, n_multi = 0, n_zero = 0;

  function automatic int find(input out_addr_t s);
    for (int k = 0; k < 40; k++) if (srcs[k] == s) return k;
    return -1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (dst_valid && dst_ready) begin
      n_out++;
      check(expq.size() > 0, "word without source");
      if (expq.size() > 0) check(dst == expq.pop_front(), "target word and order");
    end
    if (src_valid && src_ready) begin
      int k;
      k = find(src);
      if (k >= 0) begin
        for (int j = 0; j < fan[k]; j++) expq.push_back(tgts[base[k] + j]);
        if (fan[k] > 1) n_multi++;
        if (fan[k] == 0) n_zero++;
      end
    end
  end

  initial begin
    int next;
    lut_we = 0; tgt_we = 0; src_valid = 0; dst_ready = 0;
    lut_addr = '0; lut_base = '0; lut_count = '0; tgt_addr = '0; tgt_data = '0; src = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!tready && !src_ready, "table clear after reset");
    wait (tready);
    check(dut.state_q != 0, "clear done");
    // build table: distinct sources
    next = 0;
    for (int k = 0; k < 40; k++) begin
      do srcs[k] = out_addr_t'($urandom_range(4095)); while (find(srcs[k]) != k);
      fan[k] = (k < 4) ? 0 : $urandom_range(6, 1);
      base[k] = next;
      next += fan[k];
      @(negedge clk);
      lut_we = 1; lut_addr = srcs[k]; lut_base = 8'(base[k]); lut_count = 8'(fan[k]);
      for (int j = 0; j < fan[k]; j++) begin
        tgts[base[k] + j] = in_addr_t'($urandom);
        @(negedge clk);
        lut_we = 0; tgt_we = 1; tgt_addr = 8'(base[k] + j); tgt_data = tgts[base[k] + j];
      end
      @(negedge clk);
      lut_we = 0; tgt_we = 0;
    end

    // phase 1: random handshakes
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      dst_ready = 1'($urandom_range(3) != 0);
      if (!src_valid || src_ready) begin
        src_valid = 1'($urandom_range(1));
        src = ($urandom_range(4) == 0) ? out_addr_t'($urandom_range(4095))
                                       : srcs[$urandom_range(39)];
      end
    end
    @(negedge clk); src_valid = 0; dst_ready = 1;
    repeat (20) @(negedge clk);
    check(expq.size() == 0, "all targets delivered");
    check(n_multi > 100 && n_zero > 10 && n_out > 1000, "fan-out cases covered");

    // phase 2: rate check, both sides always ready
    for (int k = 0; k < 40; k++) begin
      int t0, t1;
      @(negedge clk);
      src = srcs[k]; src_valid = 1;
      while (!src_ready) @(negedge clk);
      @(posedge clk); t0 = $time;
      #1;
      src = srcs[(k + 1) % 40];
      @(negedge clk);
      while (!src_ready) @(negedge clk);
      t1 = $time + 5;
      check((t1 - t0) / 10 == ((fan[k] == 0) ? 1 : 1 + fan[k]),
            $sformatf("busy %0d clocks for fan-out %0d", (t1 - t0) / 10, fan[k]));
      src_valid = 0;
      repeat (8) @(negedge clk);
    end
    check(expq.size() == 0, "all rate-phase targets delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
