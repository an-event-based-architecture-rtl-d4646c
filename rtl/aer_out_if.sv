// aer_out_if: output AER interface of the chip.
//
// Nodes that have fired keep a request line high until they are acknowledged. This
// interface picks one waiting node per transfer, acknowledges it, and drives the address
// of the output port it fired on, {row, column, port}, onto the output bus: 12 lines for
// the 4096 output ports of the 64x32 array (log2 of the number of event sources, as in
// the paper).
//
// Arbitration is in two levels, like the row/column arbiters of AER senders: a
// round-robin pick among rows that have any request, then a round-robin pick among the
// columns of that row, with one column pointer per row. A waiting node is therefore
// served within ROWS*COLS transfers, whatever the other nodes do.
//
// Bus handshake (own choice, synchronous stand-in for the chip's four-phase handshake):
// aer_valid_o / aer_ready_i; a word is transferred on a clock edge where both are high.
// While valid is high and ready low the word is held (stall_o is high when nodes are
// waiting behind a stalled bus). The selected node is acknowledged in the same cycle the
// address is loaded into the output register, so one event can leave per clock.
module aer_out_if #(
  parameter int unsigned ROWS = csp_pkg::ROWS,
  parameter int unsigned COLS = csp_pkg::COLS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [ROWS-1:0][COLS-1:0]  req_i,
  input  logic [ROWS-1:0][COLS-1:0]  port_i,
  output logic [ROWS-1:0][COLS-1:0]  ack_o,
  output csp_pkg::out_addr_t         aer_addr_o,
  output logic                       aer_valid_o,
  input  logic                       aer_ready_i,
  output logic                       stall_o
);
  import csp_pkg::*;

  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;

  logic [RW-1:0]   row_ptr_q, row_sel;
  logic [CW-1:0]   col_sel;
  logic [ROWS-1:0][CW-1:0] col_ptr_q;
  logic [ROWS-1:0] row_any;
  logic            found, load;

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) row_any[r] = |req_i[r];
  end

  // round-robin row pick, then round-robin column pick in that row
  always_comb begin
    int unsigned ri, ci;
    logic        cfound;
    ri      = 0;
    ci      = 0;
    cfound  = 1'b0;
    found   = 1'b0;
    row_sel = '0;
    col_sel = '0;
    for (int unsigned k = 0; k < ROWS; k++) begin
      ri = (int'(row_ptr_q) + k) % ROWS;
      if (!found && row_any[ri]) begin
        found   = 1'b1;
        row_sel = RW'(ri);
      end
    end
    if (found) begin
      for (int unsigned k = 0; k < COLS; k++) begin
        ci = (int'(col_ptr_q[row_sel]) + k) % COLS;
        if (!cfound && req_i[row_sel][ci]) begin
          cfound  = 1'b1;
          col_sel = CW'(ci);
        end
      end
    end
  end

  assign load = found && (!aer_valid_o || aer_ready_i);

  always_comb begin
    ack_o = '0;
    if (load) ack_o[row_sel][col_sel] = 1'b1;
  end

  assign stall_o = found && aer_valid_o && !aer_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aer_valid_o <= 1'b0;
      aer_addr_o  <= '0;
      row_ptr_q   <= '0;
      col_ptr_q   <= '0;
    end else begin
      if (load) begin
        aer_valid_o     <= 1'b1;
        aer_addr_o.row  <= ROW_W'(row_sel);
        aer_addr_o.col  <= COL_W'(col_sel);
        aer_addr_o.port <= port_i[row_sel][col_sel];
        row_ptr_q       <= RW'((int'(row_sel) + 1) % ROWS);
        col_ptr_q[row_sel] <= CW'((int'(col_sel) + 1) % COLS);
      end else if (aer_ready_i) begin
        aer_valid_o <= 1'b0;
      end
    end
  end

  // A word on the bus stays put until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    aer_valid_o && !aer_ready_i |=> aer_valid_o && $stable(aer_addr_o));

endmodule
