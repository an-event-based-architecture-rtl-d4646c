// tb_node_array: self-checking test of the node array with merged variables.
//
// A small array (4 x 8) is configured with variables of 1, 2, 3 and 4 nodes (2-, 4-, 6-
// and 8-valued). Random input events (row/base-column lines plus input-port word, as
// the input AER interface drives them) and oscillator spikes are applied. After every
// step the state bits of every node are read back and compared with a reference model
// of each variable (f_hw in csp_ref_pkg, mapped one-hot onto the nodes), and every
// request raised by a spike must come from the node holding the variable's state, on
// the right port, one clock after the spike. Spikes of non-leading nodes of a merged
// variable must raise nothing. A repeated spike without acknowledge must flag a lost
// event.
module tb_node_array;
  import csp_pkg::*;
  import csp_ref_pkg::*;

  localparam int R = 4, C = 8;
  logic clk = 0, rst_n = 0;
  always #100 clk = ~clk;  // long period: state read-back steps #1 within a phase

  logic              cfg_we, cfg_link, state_init;
  logic [ROW_W-1:0]  cfg_row, rd_row;
  logic [COL_W-1:0]  cfg_col, rd_col;
  logic [R-1:0]      row_sel;
  logic [C-1:0]      col_sel;
  logic [C-1:0][1:0] col_word;
  logic [R-1:0][C-1:0] osc, req, port, ack;
  logic              lost;
  logic [1:0]        rd_state;
  logic              rd_link;

  node_array #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col),
    .cfg_link_i(cfg_link), .state_init_i(state_init), .row_sel_i(row_sel),
    .col_sel_i(col_sel), .col_word_i(col_word), .osc_i(osc), .req_o(req),
    .port_o(port), .ack_i(ack), .lost_o(lost), .rd_row_i(rd_row), .rd_col_i(rd_col),
    .rd_state_o(rd_state), .rd_link_o(rd_link));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t req=%h port=%h", what, $time, req, port);
    end
  endtask

  // variables: base column, length (nodes) per row
  int nvar;
  int vrow[64], vbase[64], vlen[64], vst[64];
  // chain lengths per row, all within C = 8
  int layout[R][] = '{'{1, 3, 4}, '{2, 2, 4}, '{4, 1, 1, 2}, '{3, 1, 4}};

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    row_sel = '0; col_sel = '0; col_word = '0; osc = '0; ack = '0;
    cfg_we = 0; state_init = 0;
  endtask

  task automatic check_states(input string ctx);
    for (int v = 0; v < nvar; v++)
      for (int j = 0; j < vlen[v]; j++) begin
        logic [1:0] exp;
        exp = '0;
        if (vst[v] > 0 && (vst[v] - 1) / 2 == j) exp[(vst[v] - 1) % 2] = 1'b1;
        rd_row = ROW_W'(vrow[v]);
        rd_col = COL_W'(vbase[v] + j);
        #1;
        check(rd_state == exp, $sformatf("%s: var %0d node %0d state %b exp %b",
                                         ctx, v, j, rd_state, exp));
      end
  endtask

  initial begin
    idle();
    rd_row = '0; rd_col = '0; cfg_row = '0; cfg_col = '0; cfg_link = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configure links
    nvar = 0;
    for (int r = 0; r < R; r++) begin
      int c;
      c = 0;
      foreach (layout[r][k]) begin
        vrow[nvar] = r; vbase[nvar] = c; vlen[nvar] = layout[r][k]; vst[nvar] = 1;
        for (int j = 0; j < layout[r][k]; j++) begin
          @(negedge clk);
          cfg_we = 1; cfg_row = ROW_W'(r); cfg_col = COL_W'(c + j); cfg_link = (j != 0);
        end
        c += layout[r][k];
        nvar++;
      end
    end
    @(negedge clk); cfg_we = 0; state_init = 1;
    @(negedge clk); state_init = 0;
    check_states("init");

    for (int it = 0; it < 3000; it++) begin
      int v, kind, n, pre;
      logic [7:0] w;
      v = $urandom_range(nvar - 1);
      n = 2 * vlen[v];
      kind = $urandom_range(2);  // 0 input event, 1 spike, 2 both
      pre = vst[v];
      @(negedge clk);
      idle();
      if (kind != 1) begin
        w = 8'($urandom_range((1 << n) - 1, 1));
        row_sel[vrow[v]] = 1'b1;
        col_sel[vbase[v]] = 1'b1;
        for (int j = 0; j < 4; j++)
          if (vbase[v] + j < C) col_word[vbase[v] + j] = w[2*j +: 2];
        vst[v] = f_hw(w, vst[v], n);
      end
      if (kind != 0) begin
        osc[vrow[v]][vbase[v]] = 1'b1;
        // spikes of following nodes of the same variable must be ignored
        for (int j = 1; j < vlen[v]; j++) osc[vrow[v]][vbase[v] + j] = 1'($urandom_range(1));
      end
      @(negedge clk);
      idle();
      if (kind != 0) begin
        int node;
        node = vbase[v] + (pre - 1) / 2;
        check(req[vrow[v]][node] && port[vrow[v]][node] == 1'((pre - 1) % 2),
              $sformatf("emit var %0d state %0d", v, pre));
        check($countones(req) == 1, "exactly one request");
      end else begin
        check(req == '0, "no request without spike");
      end
      check_states($sformatf("it %0d", it));
      // acknowledge
      ack = req;
      @(negedge clk);
      idle();
      check(req == '0, "request cleared by ack");
    end

    // lost event: two spikes to the same variable without acknowledge
    @(negedge clk); osc[0][0] = 1'b1;
    @(negedge clk); osc[0][0] = 1'b1;
    @(posedge clk); #1;
    check(lost, "lost event flagged");
    @(negedge clk); idle(); ack = req;
    @(negedge clk); idle();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
