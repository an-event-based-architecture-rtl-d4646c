// aer_in_if: input AER interface of the chip.
//
// Takes a target address {row, base column, input-port word} from the input bus and
// delivers the event to the array by raising one row line and one column line. The
// word (input-port index i of an up-to-8-valued variable) is spread over the column
// data lines: bits 2j and 2j+1 go to column base+j, the j-th node of the variable, so
// that every node of a merged variable sees its own two bits in the same cycle.
//
// An address whose word is zero carries no allowed state (port 0 is the node's
// internal oscillator port, not reachable from outside) and an address outside the
// array names no node: both are dropped and counted on drop_o.
//
// Bus handshake (own choice): aer_valid_i / aer_ready_o, ready is always high, so one
// event is accepted per clock. The decoded lines are registered and stay high for one
// clock; the array's state changes on the following edge.
//
// From the paper: row and column activation by the input AER interface and the n-line
// binary input-port word of an n-valued variable. Own choices: the address layout, the
// word spreading over column lines, the synchronous bus, the drop rule.
module aer_in_if #(
  parameter int unsigned ROWS = csp_pkg::ROWS,
  parameter int unsigned COLS = csp_pkg::COLS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  csp_pkg::in_addr_t     aer_addr_i,
  input  logic                  aer_valid_i,
  output logic                  aer_ready_o,
  output logic [ROWS-1:0]       row_sel_o,
  output logic [COLS-1:0]       col_sel_o,
  output logic [COLS-1:0][1:0]  col_word_o,
  output logic                  drop_o
);
  import csp_pkg::*;

  logic in_range, take;

  assign aer_ready_o = 1'b1;
  assign in_range    = (int'(aer_addr_i.row) < int'(ROWS)) && (int'(aer_addr_i.col) < int'(COLS));
  assign take        = aer_valid_i && in_range && (aer_addr_i.word != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_sel_o  <= '0;
      col_sel_o  <= '0;
      col_word_o <= '0;
      drop_o     <= 1'b0;
    end else begin
      row_sel_o  <= '0;
      col_sel_o  <= '0;
      col_word_o <= '0;
      drop_o     <= aer_valid_i && !take;
      if (take) begin
        row_sel_o[aer_addr_i.row] <= 1'b1;
        col_sel_o[aer_addr_i.col] <= 1'b1;
        for (int j = 0; j < int'(MAX_MERGE); j++) begin
          if (int'(aer_addr_i.col) + j < int'(COLS))
            col_word_o[int'(aer_addr_i.col) + j] <= aer_addr_i.word[2*j +: 2];
        end
      end
    end
  end

endmodule
