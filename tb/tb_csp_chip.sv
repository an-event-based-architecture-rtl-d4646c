// tb_csp_chip: self-checking test of the chip (4 x 8 nodes, fast oscillators).
//
// Variables of 2, 4, 6 and 8 values are configured. In each round the testbench sends a
// burst of random input events through the input AER bus and updates a reference model
// of every variable (f_hw). It then lets the chip run: every word on the output AER bus
// must be the output port of the current state of a configured variable (node holding
// the state, port bit), every variable must advertise its state at least once per
// observation window, and no more often than its oscillator allows. Node states are
// also read back through the read port. One round holds the output bus (ready low) to
// show that emitters wait (stall) and that a node that fires again while waiting
// replaces its event (lost).
module tb_csp_chip;
  import csp_pkg::*;
  import csp_ref_pkg::*;

  localparam int R = 4, C = 8;
  localparam int VTH = 4096;
  logic clk = 0, rst_n = 0;
  always #50 clk = ~clk;

  logic cfg_we, cfg_link, state_init, out_valid, out_ready, in_valid, in_ready;
  logic lost, drop, stall, rd_link;
  logic [ROW_W-1:0] cfg_row, rd_row;
  logic [COL_W-1:0] cfg_col, rd_col;
  logic [1:0] rd_state;
  logic [BIAS_W-1:0] bias;
  out_addr_t out_addr;
  in_addr_t in_addr;

  csp_chip #(.ROWS(R), .COLS(C), .OSC_VTH(VTH)) dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col),
    .cfg_link_i(cfg_link), .state_init_i(state_init), .rd_row_i(rd_row), .rd_col_i(rd_col),
    .rd_state_o(rd_state), .rd_link_o(rd_link), .bias_i(bias),
    .aer_out_addr_o(out_addr), .aer_out_valid_o(out_valid), .aer_out_ready_i(out_ready),
    .aer_in_addr_i(in_addr), .aer_in_valid_i(in_valid), .aer_in_ready_o(in_ready),
    .lost_o(lost), .drop_o(drop), .stall_o(stall));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int layout[R][] = '{'{1, 2, 3, 1, 1}, '{4, 2, 1, 1}, '{1, 1, 1, 1, 1, 1, 1, 1}, '{3, 3, 2}};
  int nvar;
  int vrow[32], vbase[32], vlen[32], vst[32], vcnt[32];
  int owner[R][C];
  bit observe = 0;
  int n_stall = 0, n_lost = 0, n_words = 0;

  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (lost) n_lost++;
    if (out_valid && out_ready) begin
      n_words++;
      if (observe) begin
        int v, p;
        v = owner[out_addr.row][out_addr.col];
        p = 2 * (int'(out_addr.col) - vbase[v]) + int'(out_addr.port) + 1;
        check(p == vst[v], $sformatf("var %0d advertised %0d, state %0d", v, p, vst[v]));
        vcnt[v]++;
      end
    end
  end

  initial begin
    nvar = 0;
    cfg_we = 0; cfg_link = 0; cfg_row = '0; cfg_col = '0; state_init = 0; rd_row = '0;
    rd_col = '0; bias = 16'd40; out_ready = 1; in_valid = 0; in_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      int c;
      c = 0;
      foreach (layout[r][k]) begin
        vrow[nvar] = r; vbase[nvar] = c; vlen[nvar] = layout[r][k]; vst[nvar] = 1;
        for (int j = 0; j < layout[r][k]; j++) begin
          owner[r][c + j] = nvar;
          @(negedge clk);
          cfg_we = 1; cfg_row = ROW_W'(r); cfg_col = COL_W'(c + j); cfg_link = (j != 0);
        end
        c += layout[r][k];
        nvar++;
      end
    end
    @(negedge clk); cfg_we = 0; state_init = 1;
    @(negedge clk); state_init = 0;

    for (int round = 0; round < 12; round++) begin
      // burst of input events
      observe = 0;
      for (int e = 0; e < 20; e++) begin
        int v, n;
        v = $urandom_range(nvar - 1);
        n = 2 * vlen[v];
        @(negedge clk);
        in_valid = 1;
        in_addr.row = ROW_W'(vrow[v]);
        in_addr.col = COL_W'(vbase[v]);
        in_addr.word = 8'($urandom_range((1 << n) - 1, 1));
        vst[v] = f_hw(in_addr.word, vst[v], n);
        check(in_ready, "input bus ready");
      end
      @(negedge clk); in_valid = 0;
      if (round == 5) begin
        out_ready = 0;                    // hold the output bus for a while
        repeat (300) @(negedge clk);
        out_ready = 1;
      end
      repeat (20) @(negedge clk);         // flush events emitted during the burst
      // read back all node states
      for (int v = 0; v < nvar; v++)
        for (int j = 0; j < vlen[v]; j++) begin
          logic [1:0] exp;
          exp = '0;
          if ((vst[v] - 1) / 2 == j) exp[(vst[v] - 1) % 2] = 1'b1;
          rd_row = ROW_W'(vrow[v]); rd_col = COL_W'(vbase[v] + j);
          #1;
          check(rd_state == exp && rd_link == (j != 0), $sformatf("read-back var %0d node %0d", v, j));
        end
      // observation window: about 3 oscillator periods (period ~ VTH/bias clocks)
      for (int v = 0; v < nvar; v++) vcnt[v] = 0;
      observe = 1;
      repeat (3 * VTH / 40 + 40) @(negedge clk);
      observe = 0;
      for (int v = 0; v < nvar; v++)
        check(vcnt[v] >= 2 && vcnt[v] <= 5, $sformatf("var %0d advertised %0d times", v, vcnt[v]));
    end
    check(n_stall > 0, "output stall seen");
    check(n_lost > 0, "lost event seen while the bus was held");
    $display("words %0d stalls %0d lost %0d", n_words, n_stall, n_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
