// node_array: the ROWS x COLS array of binary nodes with its merge configuration.
//
// Each node (csp_node) is wired to its left and right neighbour in the same row by the
// carry chains that let 2, 3 or 4 adjacent nodes act as one 4-, 6- or 8-valued
// variable. A per-node link bit, written through the configuration port, says "this
// node continues the variable of its left neighbour"; a node with link = 0 is the base
// (leftmost node) of a variable. A chain longer than four nodes is a configuration
// error and is flagged by an assertion.
//
// Input events arrive already decoded by the input AER interface: one row line, one
// base-column line and, on every column, the two bits of the input-port word meant for
// that column. Oscillator spikes come in one bit per node. Every node presents a
// request and port bit to the output AER interface and takes an ack back. A read port
// returns the two state bits of any node for observation.
//
// Timing: a delivered event changes state on the next clock edge; an oscillator spike
// raises the request on the next edge.
//
// From the paper: the 64*32 array and the merging of 2, 3 or 4 adjacent nodes. Own
// choices: merging within a row, the link-bit configuration and its write port, the
// state read port.
module node_array #(
  parameter int unsigned ROWS = csp_pkg::ROWS,
  parameter int unsigned COLS = csp_pkg::COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          cfg_we_i,
  input  logic [csp_pkg::ROW_W-1:0]     cfg_row_i,
  input  logic [csp_pkg::COL_W-1:0]     cfg_col_i,
  input  logic                          cfg_link_i,
  input  logic                          state_init_i,
  // decoded input event
  input  logic [ROWS-1:0]               row_sel_i,
  input  logic [COLS-1:0]               col_sel_i,
  input  logic [COLS-1:0][1:0]          col_word_i,
  // oscillators
  input  logic [ROWS-1:0][COLS-1:0]     osc_i,
  // output AER handshake
  output logic [ROWS-1:0][COLS-1:0]     req_o,
  output logic [ROWS-1:0][COLS-1:0]     port_o,
  input  logic [ROWS-1:0][COLS-1:0]     ack_i,
  output logic                          lost_o,
  // observation
  input  logic [csp_pkg::ROW_W-1:0]     rd_row_i,
  input  logic [csp_pkg::COL_W-1:0]     rd_col_i,
  output logic [1:0]                    rd_state_o,
  output logic                          rd_link_o
);

  logic [ROWS-1:0][COLS-1:0]      link_q;
  logic [ROWS-1:0][COLS-1:0]      ev, seen, keep_l, osc_c, keep_r, any_r, lost;
  logic [ROWS-1:0][COLS-1:0][1:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      link_q <= '0;
    end else if (cfg_we_i) begin
      // column 0 has no left neighbour and is always a base node
      link_q[cfg_row_i][cfg_col_i] <= cfg_link_i && (cfg_col_i != '0);
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic ev_l, seen_l, keep_l_in, osc_l, keep_r_in, any_r_in;
      if (c == 0) begin : g_first
        assign ev_l      = 1'b0;
        assign seen_l    = 1'b0;
        assign keep_l_in = 1'b0;
        assign osc_l     = 1'b0;
      end else begin : g_mid
        assign ev_l      = ev[r][c-1];
        assign seen_l    = seen[r][c-1];
        assign keep_l_in = keep_l[r][c-1];
        assign osc_l     = osc_c[r][c-1];
      end
      if (c == COLS-1) begin : g_last
        assign keep_r_in = 1'b0;
        assign any_r_in  = 1'b0;
      end else begin : g_inner
        assign keep_r_in = link_q[r][c+1] & keep_r[r][c+1];
        assign any_r_in  = link_q[r][c+1] & any_r[r][c+1];
      end

      csp_node u_node (
        .clk          (clk),
        .rst_n        (rst_n),
        .link_i       (link_q[r][c]),
        .state_init_i (state_init_i),
        .ev_base_i    (row_sel_i[r] & col_sel_i[c]),
        .ev_word_i    (col_word_i[c]),
        .ev_l_i       (ev_l),
        .seen_l_i     (seen_l),
        .keep_l_i     (keep_l_in),
        .osc_l_i      (osc_l),
        .keep_r_i     (keep_r_in),
        .any_r_i      (any_r_in),
        .ev_o         (ev[r][c]),
        .seen_o       (seen[r][c]),
        .keep_l_o     (keep_l[r][c]),
        .osc_o        (osc_c[r][c]),
        .keep_r_o     (keep_r[r][c]),
        .any_r_o      (any_r[r][c]),
        .osc_i        (osc_i[r][c]),
        .req_o        (req_o[r][c]),
        .port_o       (port_o[r][c]),
        .ack_i        (ack_i[r][c]),
        .lost_o       (lost[r][c]),
        .state_o      (state[r][c])
      );
    end
  end

  assign lost_o     = |lost;
  assign rd_state_o = state[rd_row_i][rd_col_i];
  assign rd_link_o  = link_q[rd_row_i][rd_col_i];

  // A variable spans at most MAX_MERGE nodes: no run of MAX_MERGE link bits.
  function automatic logic chain_too_long(input logic [ROWS-1:0][COLS-1:0] l);
    logic bad, all1;
    bad = 1'b0;
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c + int'(csp_pkg::MAX_MERGE) <= int'(COLS); c++) begin
        all1 = 1'b1;
        for (int k = 0; k < int'(csp_pkg::MAX_MERGE); k++) all1 &= l[r][c+k];
        bad |= all1;
      end
    return bad;
  endfunction

  a_merge_limit: assert property (@(posedge clk) disable iff (!rst_n)
    !chain_too_long(link_q))
    else $error("node_array: more than %0d nodes merged into one variable",
                csp_pkg::MAX_MERGE);

endmodule
