`timescale 1ps/1ps
// tb_droop_detector: steps the test supply through a list of voltages. For
// each, the expected outputs are worked out from the delay model: the test
// line (5 buffers of 100 ps * 800 / (V - 400)) against the reference line
// (7 buffers of 100 ps). Slower test line: calibrate_out = 1, detect_out = 0;
// faster: calibrate_out = 0, detect_out = 1.
module tb_droop_detector;
  import droop_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  logic clk = 1'b0, cal, det;
  int unsigned vdd = 1200;
  droop_detector dut (.clk_in(clk), .test_vdd_mv(vdd), .calibrate_out(cal), .detect_out(det));
  always #(T_IN_PS / 2) clk = ~clk;

  initial begin
    int unsigned volts [10] = '{1200, 1100, 1000, 980, 960, 900, 800, 700, 1150, 1250};
    int n_droop = 0, n_ok = 0;
    foreach (volts[i]) begin
      real test_ps;
      bit  slow;
      vdd = volts[i];
      repeat (6) @(posedge clk);
      #1;
      test_ps = 5.0 * 100.0 * 800.0 / real'(volts[i] - 400);
      slow = test_ps > 700.0;
      if (slow) n_droop++; else n_ok++;
      check(det == !slow, $sformatf("detect_out=%b at %0d mV", det, volts[i]));
      check(cal == slow,  $sformatf("calibrate_out=%b at %0d mV", cal, volts[i]));
    end
    check(n_droop >= 3 && n_ok >= 3, "both sides of the threshold");
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
