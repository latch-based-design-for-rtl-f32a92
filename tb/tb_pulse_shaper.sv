`timescale 1ps/1ps
// tb_pulse_shaper: feeds clock pulses of period T with high times from 3T/4
// (a delay element on its fast path) down to 9T/20, in random order. Every
// input rise must reappear exactly T/10 later, and every output pulse must be
// high for T/4 + T/5 = 9T/20 (2250 ps), regardless of the input duty cycle.
module tb_pulse_shaper;
  import droop_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  logic in = 1'b0, out;
  pulse_shaper dut (.clk_in(in), .clk_out(out));

  time t_in_rise, t_out_rise;
  int  n_out = 0;
  always @(posedge in) t_in_rise = $time;
  // The first nanoseconds are power-up settling of the delay lines.
  always @(posedge out) if ($time > 5000) begin
    t_out_rise = $time;
    check($time - t_in_rise == time'(TENTH_PS), $sformatf("rise delay %0t", $time - t_in_rise));
  end
  always @(negedge out) if ($time > 5000) begin
    n_out++;
    check($time - t_out_rise == time'(QUARTER_PS + FIFTH_PS), $sformatf("high time %0t", $time - t_out_rise));
  end

  initial begin
    int unsigned highs [4] = '{3750, 2500, 2250, 3500};
    int n_in = 0;
    #10000;
    for (int i = 0; i < 200; i++) begin
      int unsigned h;
      h = highs[$urandom_range(3, 0)];
      in = 1'b1; #(h);
      in = 1'b0; #(T_PS - h);
      n_in++;
    end
    #10000;
    check(n_out == n_in, $sformatf("%0d output pulses for %0d input pulses", n_out, n_in));
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
