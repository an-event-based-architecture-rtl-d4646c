// tb_aer_in_if: self-checking test of the input AER interface.
//
// Random target addresses {row, base column, word} are offered on the input bus of an
// 8 x 8 interface, including words of zero and rows/columns outside the array. One
// clock after each accepted address exactly one row line and one column line must be
// high, and column base+j must carry bits 2j+1..2j of the word (columns past the array
// edge are cut off); all other column data must be zero. Zero words and out-of-range
// addresses must raise no line and pulse drop. Ready must stay high (one address per
// clock).
module tb_aer_in_if;
  import csp_pkg::*;

  localparam int R = 8, C = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  in_addr_t a;
  logic valid, ready, drop;
  logic [R-1:0] row_sel;
  logic [C-1:0] col_sel;
  logic [C-1:0][1:0] col_word;

  aer_in_if #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .aer_addr_i(a), .aer_valid_i(valid), .aer_ready_o(ready),
    .row_sel_o(row_sel), .col_sel_o(col_sel), .col_word_o(col_word), .drop_o(drop));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_drop = 0, n_ok = 0;

  initial begin
    in_addr_t prev;
    logic pvalid;
    logic [R-1:0] er;
    logic [C-1:0] ec;
    logic [C-1:0][1:0] ew;
    bit good;
    a = '0; valid = 0; pvalid = 0; prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      check(ready, "always ready");
      // check the outputs for the address of the previous clock
      good = pvalid && prev.word != 0 && prev.row < R && prev.col < C;
      er = '0; ec = '0; ew = '0;
      if (good) begin
        er[prev.row] = 1'b1;
        ec[prev.col] = 1'b1;
        for (int j = 0; j < 4; j++)
          if (prev.col + j < C) ew[prev.col + j] = prev.word[2*j +: 2];
        n_ok++;
      end
      check(row_sel == er, "row lines");
      check(col_sel == ec, "column line");
      check(col_word == ew, "column data lines");
      check(drop == (pvalid && !good), "drop flag");
      if (pvalid && !good) n_drop++;
      // next address
      valid = 1'($urandom_range(3) != 0);
      a.row  = ROW_W'($urandom_range(R + 1));
      a.col  = COL_W'($urandom_range(C + 1));
      a.word = ($urandom_range(9) == 0) ? 8'h00 : 8'($urandom_range(255, 1));
      prev = a; pvalid = valid;
    end
    check(n_drop > 100 && n_ok > 1000, "both delivered and dropped addresses seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
