`timescale 1ps/1ps
// tb_phase_accumulator: 400 MHz input clock, random active-low droop input
// g_in changed 1 ns after each output rise (so it is stable while the
// sampling latch is open). The value present at output rise k is counted at
// fall k, so period k -> k+1 must be T when it was 1 and T + T/4 when it was 0.
// Every high time must be T/2. The output stays low in reset, and the four
// phases must be used in turn (all four select values seen).
module tb_phase_accumulator;
  import droop_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  logic clk_in = 1'b0, r_in = 1'b1, g_in = 1'b1, clk_out;
  // Reset falls just after time 0 so that the asynchronous reset sees an edge.
  initial #1 r_in = 1'b0;
  phase_accumulator dut (.clk_in(clk_in), .r_in(r_in), .g_in(g_in), .clk_out(clk_out));
  always #(T_IN_PS / 2) clk_in = ~clk_in;

  time  t_rise = 0;
  int   n_rise = 0;
  logic g_at_prev_rise = 1'b1;
  int   n_steps = 0, n_plain = 0;
  bit   seen_sel [4];

  always @(posedge clk_out) if (r_in) begin
    if (n_rise >= 2) begin
      if (!g_at_prev_rise) begin
        check($time - t_rise == time'(T_PS + QUARTER_PS), $sformatf("period %0t after a droop sample", $time - t_rise));
        n_steps++;
      end else begin
        check($time - t_rise == time'(T_PS), $sformatf("period %0t after a clean sample", $time - t_rise));
        n_plain++;
      end
    end
    g_at_prev_rise = g_in;
    t_rise = $time;
    n_rise++;
    seen_sel[{dut.sel1, dut.sel0}] = 1'b1;
    #1000 g_in = 1'($urandom_range(2, 0) != 0);
  end
  always @(negedge clk_out) if (r_in && n_rise > 0)
    check($time - t_rise == time'(T_PS / 2), $sformatf("high time %0t", $time - t_rise));

  initial begin
    #20000;
    check(clk_out == 1'b0, "output low in reset");
    r_in = 1'b1;
    wait (n_rise == 300);
    check(n_steps > 50 && n_plain > 50, "both kinds of cycle seen");
    foreach (seen_sel[i]) check(seen_sel[i], $sformatf("phase select %0d never used", i));
    $display("steps=%0d plain=%0d", n_steps, n_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
