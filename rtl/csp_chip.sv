// csp_chip: the prototype chip: node array, one oscillator per node, output and input
// AER interfaces.
//
// Every node owns an integrate-and-fire oscillator (behavioural model) fed by the common
// bias from the bias generator; per-instance mismatch gains spread their rates, which is
// what makes the search explore (the paper relies on fabrication mismatch and measured a
// spread of about 10 %: mean 209.84 Hz, std 22 Hz). The node logic applies the f_HW /
// g_HW rules; the output AER interface sends the address of each emitted output port
// off-chip; the input AER interface turns each incoming target address into row/column
// activations. The event loop is closed outside the chip by the router (see csp_system).
//
// The bias generator is analog and is not modelled: its output is the bias_i port.
// Configuration: cfg_* writes the merge link bit of one node; state_init_i puts every
// variable in its state 1. rd_* reads one node's state and link bit.
//
// Timing: an input word reaches the node lines one clock after it is accepted and the
// state changes one clock later. A spike raises the node request on the next edge; the
// output bus is loaded on the edge after that at the earliest.
//
// From the paper: the block structure (array, AER interfaces on its sides, bias
// generator, one oscillator per node) and the 64*32 size. Own choices: the clocked
// form of what is an asynchronous circuit on the prototype, the configuration port, and
// the mismatch model (gain uniformly spread over about +/-18 %, random initial phase).
module csp_chip #(
  parameter int unsigned ROWS    = csp_pkg::ROWS,
  parameter int unsigned COLS    = csp_pkg::COLS,
  parameter int unsigned OSC_VTH = 32'd1 << 20,
  parameter int unsigned SEED    = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration and observation
  input  logic                       cfg_we_i,
  input  logic [csp_pkg::ROW_W-1:0]  cfg_row_i,
  input  logic [csp_pkg::COL_W-1:0]  cfg_col_i,
  input  logic                       cfg_link_i,
  input  logic                       state_init_i,
  input  logic [csp_pkg::ROW_W-1:0]  rd_row_i,
  input  logic [csp_pkg::COL_W-1:0]  rd_col_i,
  output logic [1:0]                 rd_state_o,
  output logic                       rd_link_o,
  // from the (analog) bias generator
  input  logic [csp_pkg::BIAS_W-1:0] bias_i,
  // output AER bus
  output csp_pkg::out_addr_t         aer_out_addr_o,
  output logic                       aer_out_valid_o,
  input  logic                       aer_out_ready_i,
  // input AER bus
  input  csp_pkg::in_addr_t          aer_in_addr_i,
  input  logic                       aer_in_valid_i,
  output logic                       aer_in_ready_o,
  // event statistics
  output logic                       lost_o,    // a waiting node event was replaced
  output logic                       drop_o,    // an input address was dropped
  output logic                       stall_o    // nodes wait behind a stalled bus
);

  // Mismatch of instance n: a fixed hash of (n, SEED) gives the gain and the phase.
  function automatic int unsigned mix(input int unsigned n);
    int unsigned h;
    h = n * 32'h9E3779B1 + SEED * 32'h85EBCA77;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  logic [ROWS-1:0][COLS-1:0] osc, req, port, ack;
  logic [ROWS-1:0]           row_sel;
  logic [COLS-1:0]           col_sel;
  logic [COLS-1:0][1:0]      col_word;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned H = mix(r * COLS + c);
      if_oscillator #(
        .VTH  (OSC_VTH),
        .GAIN (844 + (H % 361)),
        .V0   ((H >> 9) % OSC_VTH)
      ) u_osc (
        .clk     (clk),
        .rst_n   (rst_n),
        .bias_i  (bias_i),
        .spike_o (osc[r][c])
      );
    end
  end

  node_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk          (clk),
    .rst_n        (rst_n),
    .cfg_we_i     (cfg_we_i),
    .cfg_row_i    (cfg_row_i),
    .cfg_col_i    (cfg_col_i),
    .cfg_link_i   (cfg_link_i),
    .state_init_i (state_init_i),
    .row_sel_i    (row_sel),
    .col_sel_i    (col_sel),
    .col_word_i   (col_word),
    .osc_i        (osc),
    .req_o        (req),
    .port_o       (port),
    .ack_i        (ack),
    .lost_o       (lost_o),
    .rd_row_i     (rd_row_i),
    .rd_col_i     (rd_col_i),
    .rd_state_o   (rd_state_o),
    .rd_link_o    (rd_link_o)
  );

  aer_out_if #(.ROWS(ROWS), .COLS(COLS)) u_out (
    .clk         (clk),
    .rst_n       (rst_n),
    .req_i       (req),
    .port_i      (port),
    .ack_o       (ack),
    .aer_addr_o  (aer_out_addr_o),
    .aer_valid_o (aer_out_valid_o),
    .aer_ready_i (aer_out_ready_i),
    .stall_o     (stall_o)
  );

  aer_in_if #(.ROWS(ROWS), .COLS(COLS)) u_in (
    .clk         (clk),
    .rst_n       (rst_n),
    .aer_addr_i  (aer_in_addr_i),
    .aer_valid_i (aer_in_valid_i),
    .aer_ready_o (aer_in_ready_o),
    .row_sel_o   (row_sel),
    .col_sel_o   (col_sel),
    .col_word_o  (col_word),
    .drop_o      (drop_o)
  );

endmodule
