`timescale 1ps/1ps
// tb_mask01_tau: metastability analysis of the mask-01 latch, done the way such
// latches are characterised: the data input changes dt before the latch
// closes, for dt from 1 ps to just inside the setup window, and the extra delay
// until an output settles is recorded. A straight-line fit of that delay
// against ln(dt) has slope -tau. The check is that the fit returns the latch's
// tau (108 ps, the value quoted for the mask-01 latch) within 2 %. The sweep
// also checks the masking levels while unresolved (q0 = 0, q1 = 1) and that a
// sample with stable data settles in the plain output delay.
//
// The resolution law inside the latch model is this design's own assumption,
// so the fit confirms that the model carries the intended tau; it is not an
// independent measurement of a circuit.
module tb_mask01_tau;
  import droop_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  logic d = 1'b0, gn = 1'b0, rn = 1'b1, q0, q0_n, q1, q1_n;
  mask01_latch dut (.d(d), .gn(gn), .rn(rn), .q0(q0), .q0_n(q0_n), .q1(q1), .q1_n(q1_n));

  localparam int NPTS = 19;
  real x [NPTS];   // ln(dt)
  real y [NPTS];   // extra delay, ps

  initial begin
    real sx, sy, sxx, sxy, slope, tau_fit;
    time t_close, t_settle;
    int  n0 = 0, n1 = 0;
    rn = 1'b0;
    #1000 rn = 1'b1;
    // Stable data: output follows after the plain output delay.
    #1000 d = 1'b1;
    #200 gn = 1'b1;
    t_close = $time;
    #(time'(LATCH_CQ_PS) + 1);
    check(q0 == 1'b1 && q1 == 1'b1 && q0_n == 1'b0 && q1_n == 1'b0, "stable sample");
    for (int i = 0; i < NPTS; i++) begin
      int unsigned dt;
      dt = i + 1;
      #2000 gn = 1'b0;          // open
      #1000 d = ~d;             // settle to the new data, then ...
      #1000 d = ~d;             // ... change it dt before closing
      #(time'(dt)) gn = 1'b1;
      t_close = $time;
      #(time'(LATCH_CQ_PS) + 2);
      check(q0 == 1'b0 && q0_n == 1'b0 && q1 == 1'b1 && q1_n == 1'b1,
            $sformatf("masked levels while unresolved (dt=%0d)", dt));
      @(posedge q0 or posedge q0_n);
      t_settle = $time - time'(LATCH_CQ_PS);
      if (q0) n1++; else n0++;
      x[i] = $ln(real'(dt));
      y[i] = real'(t_settle - t_close);
      check(y[i] >= real'(LATCH_TAU_PS), $sformatf("resolution %0.0f ps shorter than tau", y[i]));
    end
    sx = 0; sy = 0; sxx = 0; sxy = 0;
    for (int i = 0; i < NPTS; i++) begin
      sx += x[i]; sy += y[i]; sxx += x[i] * x[i]; sxy += x[i] * y[i];
    end
    slope   = (NPTS * sxy - sx * sy) / (NPTS * sxx - sx * sx);
    tau_fit = -slope;
    $display("fitted tau = %0.1f ps (latch tau %0d ps), outcomes 0:%0d 1:%0d", tau_fit, LATCH_TAU_PS, n0, n1);
    check(tau_fit > 0.98 * LATCH_TAU_PS && tau_fit < 1.02 * LATCH_TAU_PS, "fitted tau");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
