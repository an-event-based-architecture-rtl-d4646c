// csp_pkg: constants and types shared by the event-based CSP solver chip.
//
// The chip is a ROWS x COLS array of binary nodes (two output ports each). Adjacent
// nodes of a row can be merged into 4-, 6- or 8-valued variables. Events leave the chip
// as the address of the output port that fired and come back, through an external
// router, as a target address that names a variable and the input-port word it receives.
//
// From the paper: the 64*32 array, binary nodes, merging of 2, 3 or 4 adjacent nodes,
// the n-bit input-port word of an n-valued variable, log2(K_out) output address lines.
// Own choices: which dimension is rows (64) and which columns (32), the bit layout of
// both address buses, and the width of the oscillator bias word.
package csp_pkg;

  // Array geometry (paper: "64*32 binary nodes/variables").
  localparam int unsigned ROWS      = 64;
  localparam int unsigned COLS      = 32;
  localparam int unsigned ROW_W     = $clog2(ROWS);   // 6
  localparam int unsigned COL_W     = $clog2(COLS);   // 5

  // Largest variable: 4 merged binary nodes = 8 values, 8-bit input-port word.
  localparam int unsigned MAX_MERGE = 4;
  localparam int unsigned WORD_W    = 2 * MAX_MERGE;  // 8

  // Output address: {row, col, port}. K_out = ROWS*COLS*2 = 4096 -> 12 lines.
  localparam int unsigned OUT_ADDR_W = ROW_W + COL_W + 1;
  // Input address: {row, base col, input-port word}. 6+5+8 = 19 lines.
  localparam int unsigned IN_ADDR_W  = ROW_W + COL_W + WORD_W;

  // Oscillator bias word (digital stand-in for the injected current).
  localparam int unsigned BIAS_W = 16;

  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
    logic             port;   // 0: first output of the node, 1: second
  } out_addr_t;

  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;   // column of the variable's leftmost (base) node
    logic [WORD_W-1:0] word;  // input-port index i: bit p-1 set = state p allowed
  } in_addr_t;

endpackage
