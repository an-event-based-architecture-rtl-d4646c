// csp_system: the complete solver: prototype chip plus the off-chip event router.
//
// Events leave the chip on the output AER bus as output-port addresses, are looked up
// in the router's programmable table and return, one copy per target, on the chip's
// input AER bus. A constraint satisfaction problem is loaded by writing merge links
// into the chip (which nodes form 4-, 6- or 8-valued variables) and routes into the
// router (which output port drives which input-port word of which variable), then
// pulsing state_init_i. From then on the network runs by itself; the host watches the
// output bus through the mon_* ports to read the variables' advertised values.
//
// Both buses inside are valid/ready; the router serialises fan-out, so it also stalls
// the chip's output bus while it sends the copies of an event.
//
// From the paper: the closed loop of chip, output/input AER interfaces and an off-chip
// router with a programmable table. Own choices: the host ports for configuration,
// table programming and monitoring.
module csp_system #(
  parameter int unsigned ROWS      = csp_pkg::ROWS,
  parameter int unsigned COLS      = csp_pkg::COLS,
  parameter int unsigned OSC_VTH   = 32'd1 << 20,
  parameter int unsigned SEED      = 1,
  parameter int unsigned TGT_DEPTH = 32768,
  parameter int unsigned CNT_W     = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // chip configuration and observation
  input  logic                         cfg_we_i,
  input  logic [csp_pkg::ROW_W-1:0]    cfg_row_i,
  input  logic [csp_pkg::COL_W-1:0]    cfg_col_i,
  input  logic                         cfg_link_i,
  input  logic                         state_init_i,
  input  logic [csp_pkg::ROW_W-1:0]    rd_row_i,
  input  logic [csp_pkg::COL_W-1:0]    rd_col_i,
  output logic [1:0]                   rd_state_o,
  output logic                         rd_link_o,
  // bias generator output (analog block, not modelled)
  input  logic [csp_pkg::BIAS_W-1:0]   bias_i,
  // router table programming
  input  logic                         lut_we_i,
  input  csp_pkg::out_addr_t           lut_addr_i,
  input  logic [$clog2(TGT_DEPTH)-1:0] lut_base_i,
  input  logic [CNT_W-1:0]             lut_count_i,
  input  logic                         tgt_we_i,
  input  logic [$clog2(TGT_DEPTH)-1:0] tgt_addr_i,
  input  csp_pkg::in_addr_t            tgt_data_i,
  output logic                         table_ready_o,
  // monitoring
  output csp_pkg::out_addr_t           mon_out_addr_o,
  output logic                         mon_out_fire_o,   // an output event left the chip
  output csp_pkg::in_addr_t            mon_in_addr_o,
  output logic                         mon_in_fire_o,    // a routed event entered the chip
  output logic                         lost_o,
  output logic                         drop_o,
  output logic                         stall_o
);
  import csp_pkg::*;

  out_addr_t out_addr;
  logic      out_valid, out_ready;
  in_addr_t  in_addr;
  logic      in_valid, in_ready;

  csp_chip #(.ROWS(ROWS), .COLS(COLS), .OSC_VTH(OSC_VTH), .SEED(SEED)) u_chip (
    .clk             (clk),
    .rst_n           (rst_n),
    .cfg_we_i        (cfg_we_i),
    .cfg_row_i       (cfg_row_i),
    .cfg_col_i       (cfg_col_i),
    .cfg_link_i      (cfg_link_i),
    .state_init_i    (state_init_i),
    .rd_row_i        (rd_row_i),
    .rd_col_i        (rd_col_i),
    .rd_state_o      (rd_state_o),
    .rd_link_o       (rd_link_o),
    .bias_i          (bias_i),
    .aer_out_addr_o  (out_addr),
    .aer_out_valid_o (out_valid),
    .aer_out_ready_i (out_ready),
    .aer_in_addr_i   (in_addr),
    .aer_in_valid_i  (in_valid),
    .aer_in_ready_o  (in_ready),
    .lost_o          (lost_o),
    .drop_o          (drop_o),
    .stall_o         (stall_o)
  );

  aer_router #(.TGT_DEPTH(TGT_DEPTH), .CNT_W(CNT_W)) u_router (
    .clk           (clk),
    .rst_n         (rst_n),
    .lut_we_i      (lut_we_i),
    .lut_addr_i    (lut_addr_i),
    .lut_base_i    (lut_base_i),
    .lut_count_i   (lut_count_i),
    .tgt_we_i      (tgt_we_i),
    .tgt_addr_i    (tgt_addr_i),
    .tgt_data_i    (tgt_data_i),
    .src_addr_i    (out_addr),
    .src_valid_i   (out_valid),
    .src_ready_o   (out_ready),
    .dst_addr_o    (in_addr),
    .dst_valid_o   (in_valid),
    .dst_ready_i   (in_ready),
    .table_ready_o (table_ready_o)
  );

  assign mon_out_addr_o = out_addr;
  assign mon_out_fire_o = out_valid & out_ready;
  assign mon_in_addr_o  = in_addr;
  assign mon_in_fire_o  = in_valid & in_ready;

endmodule
