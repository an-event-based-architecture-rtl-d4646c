// tb_if_oscillator: self-checking test of the oscillator model.
//
// Two instances with different mismatch gains and initial phases run from the same
// bias. Over a fixed window the number of spikes of each must equal the count worked
// out from the integrate-and-fire rule (floor of total charge over threshold), spikes
// must last one clock, and the first spike must come when the initial membrane value
// plus the integrated charge first reaches the threshold. A bias change must change the
// rate accordingly.
module tb_if_oscillator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned VTH = 10000;
  localparam int unsigned GA = 1024, GB = 1187;
  localparam int unsigned V0A = 0, V0B = 7777;

  logic [15:0] bias;
  logic        sa, sb;

  if_oscillator #(.VTH(VTH), .GAIN(GA), .V0(V0A)) u_a (.clk, .rst_n, .bias_i(bias), .spike_o(sa));
  if_oscillator #(.VTH(VTH), .GAIN(GB), .V0(V0B)) u_b (.clk, .rst_n, .bias_i(bias), .spike_o(sb));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int unsigned b, input int unsigned cycles);
    longint unsigned inc_a, inc_b, exp_a, exp_b, first_b;
    int unsigned na, nb, t_first_b;
    logic pa, pb;
    bias = 16'(b);
    inc_a = (longint'(b) * GA) >> 10;
    inc_b = (longint'(b) * GB) >> 10;
    // restart from reset so that the phases are known
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    na = 0; nb = 0; t_first_b = 0; pa = 0; pb = 0;
    for (int unsigned t = 1; t <= cycles; t++) begin
      @(negedge clk);
      if (sa) na++;
      if (sb) begin
        nb++;
        if (nb == 1) t_first_b = t;
      end
      if (sa && pa) check(0, "spike longer than one clock (a)");
      if (sb && pb) check(0, "spike longer than one clock (b)");
      pa = sa; pb = sb;
    end
    exp_a = (V0A + inc_a * cycles) / VTH;
    exp_b = (V0B + inc_b * cycles) / VTH;
    first_b = (VTH - V0B + inc_b - 1) / inc_b;
    check(na == exp_a, $sformatf("bias %0d: a fired %0d, expected %0d", b, na, exp_a));
    check(nb == exp_b, $sformatf("bias %0d: b fired %0d, expected %0d", b, nb, exp_b));
    check(t_first_b == first_b, $sformatf("bias %0d: b first spike at %0d, expected %0d",
                                          b, t_first_b, first_b));
  endtask

  initial begin
    bias = 0;
    repeat (2) @(posedge clk);
    run(100, 20000);
    run(333, 20000);
    run(1000, 5000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
