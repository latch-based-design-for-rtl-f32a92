`timescale 1ps/1ps
// tb_droop_response_top: end-to-end test of the droop-adaptive clock, all
// parameters at their defaults.
//
// Drives a 400 MHz input clock, releases reset, and lowers the detector's test
// supply for a few windows of different lengths. It measures every output
// period and high time and checks:
//   - every period is T (5000 ps) or T + T/4 (6250 ps), every high time is the
//     pulse shaper's 9T/20 (2250 ps), and no pulse is short (no glitch);
//   - outside droop windows the period is T; during a sustained droop it is
//     5T/4, starting no later than the third output edge after the
//     detector reports the droop (two full cycles), and likewise at its end;
//     a period may differ by the 100 ps small delay while a droop is handed
//     from a delay element to the next;
//   - the reset passes a latch clocked by the accumulator clock, and the first
//     edge after reset takes the slow path through all four elements;
//   - the phase accumulator takes exactly one T/4 step per stretched period
//     once the chain has drained (the delay elements hand every droop on).
// It counts how often each mechanism occurred (stretched cycle, phase step,
// slow path in each delay element, detector firing, fast-path recovery) and
// fails if one never did.
module tb_droop_response_top;
  import droop_pkg::*;

  int checks = 0, failures = 0;

  logic        clk_in = 1'b0;
  logic        rst_n  = 1'b1;
  // Reset falls just after time 0 so that the asynchronous reset sees an edge.
  initial #1 rst_n = 1'b0;
  int unsigned vdd_mv = 1200;
  logic        clk_out, calibrate_out, detect_out;

  droop_response_top dut (
    .clk_in(clk_in), .rst_n(rst_n), .test_droop_vdd_mv(vdd_mv),
    .clk_out(clk_out), .calibrate_out(calibrate_out), .detect_out(detect_out)
  );

  always #(T_IN_PS / 2) clk_in = ~clk_in;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // A delay element adds T/4 plus one small delay where the phase accumulator
  // adds exactly T/4; while a droop is handed from one to the other a period
  // can be off by that small delay.
  function automatic bit near(input time p, input int unsigned want);
    return (p + time'(SMALL_PS) + 10 >= time'(want)) && (p <= time'(want + SMALL_PS + 10));
  endfunction

  // ---------------- measurement of clk_out ----------------
  time last_rise = 0, last_fall = 0;
  int  n_rise = 0;
  bit  measuring = 1'b0;
  bit  in_droop = 1'b0;        // the detector currently reports a droop
  int  edges_since_change = 0; // output rises since detect_out last changed
  int  n_stretched = 0;
  int  n_normal = 0;

  always @(negedge detect_out or posedge detect_out) edges_since_change = 0;

  always @(posedge clk_out) begin
    time p;
    p = $time - last_rise;
    if (measuring && n_rise > 0) begin
      check(near(p, T_PS) || near(p, T_PS + QUARTER_PS),
            $sformatf("period %0t is neither T nor 5T/4", p));
      if (near(p, T_PS + QUARTER_PS)) n_stretched++;
      else n_normal++;
      if (edges_since_change >= 3) begin
        if (!detect_out)
          check(near(p, T_PS + QUARTER_PS), $sformatf("period %0t during droop", p));
        else
          check(near(p, T_PS), $sformatf("period %0t outside droop", p));
      end
      check(($time - last_fall) >= 1000, "low pulse too short");
    end
    last_rise = $time;
    n_rise++;
    edges_since_change++;
  end

  always @(negedge clk_out) begin
    if (measuring && n_rise > 1)
      check(($time - last_rise) > time'(2200) && ($time - last_rise) < time'(2300),
            $sformatf("high time %0t, expected 2250", $time - last_rise));
    last_fall = $time;
  end

  // ---------------- mechanism counters ----------------
  int n_pa_steps = 0;
  int n_slow [1:4];
  int n_fast_recover = 0;
  int n_detect = 0;
  logic [1:0] pa_cnt_q;

  always @(negedge dut.u_pa.clk_out) begin
    #1;
    if (measuring && {dut.u_pa.c1, dut.u_pa.c0} != pa_cnt_q) n_pa_steps++;
    pa_cnt_q = {dut.u_pa.c1, dut.u_pa.c0};
  end
  always @(posedge dut.g_de[1].u_de.clk_in) if (measuring && !dut.g_de[1].u_de.fast_en) n_slow[1]++;
  always @(posedge dut.g_de[2].u_de.clk_in) if (measuring && !dut.g_de[2].u_de.fast_en) n_slow[2]++;
  always @(posedge dut.g_de[3].u_de.clk_in) if (measuring && !dut.g_de[3].u_de.fast_en) n_slow[3]++;
  always @(posedge dut.g_de[4].u_de.clk_in) begin
    if (measuring && !dut.g_de[4].u_de.fast_en) n_slow[4]++;
  end
  always @(posedge dut.g_de[4].u_de.fast_en) if (measuring) n_fast_recover++;
  always @(negedge detect_out) if (measuring) n_detect++;

  // ---------------- start-up ----------------
  // After reset every latch holds 0 ("droop"), so the first edge takes the
  // slow path through every delay element.
  time t_pa_first = 0, t_out_first = 0;
  always @(posedge dut.clk[0]) if (rst_n && t_pa_first == 0) t_pa_first = $time;
  always @(posedge clk_out)    if (rst_n && t_out_first == 0) t_out_first = $time;

  // ---------------- stimulus ----------------
  task automatic droop(input int ns_len, input int unsigned mv);
    vdd_mv = mv;
    #(ns_len * 1000);
    vdd_mv = 1200;
  endtask

  initial begin
    int steps_at_start;
    for (int i = 1; i <= 4; i++) n_slow[i] = 0;
    #19000;
    check(dut.pa_rst_n == 1'b0 && clk_out == 1'b0, "held in reset");
    #1000 rst_n = 1'b1;
    #1 check(dut.pa_rst_n == 1'b1, "reset latch releases while the accumulator clock is low");
    // Let the reset-time "droop" drain out of the chain.
    repeat (20) @(posedge clk_out);
    check(detect_out == 1'b1 && calibrate_out == 1'b0, "detector idle at nominal supply");
    check(t_out_first - t_pa_first == time'(4 * (2 * SMALL_PS + TENTH_PS + QUARTER_PS)),
          $sformatf("first edge after reset delayed by %0t, expected the slow path in all four elements",
                    t_out_first - t_pa_first));
    pa_cnt_q = {dut.u_pa.c1, dut.u_pa.c0};
    measuring = 1'b1;
    repeat (10) @(posedge clk_out);
    check(n_stretched == 0, "no stretched period at nominal supply");

    // A sustained droop, a short one and a mild one that stays above threshold.
    droop(60, 900);
    repeat (15) @(posedge clk_out);
    check(detect_out == 1'b1, "detector back to idle");
    droop(6, 850);
    repeat (15) @(posedge clk_out);
    droop(40, 1050);        // above the ~971 mV threshold: no response
    repeat (15) @(posedge clk_out);
    droop(150, 700);
    repeat (15) @(posedge clk_out);

    check(n_stretched == n_pa_steps,
          $sformatf("stretched periods %0d vs phase accumulator steps %0d", n_stretched, n_pa_steps));
    check(n_stretched >= 30, $sformatf("only %0d stretched periods", n_stretched));

    $display("mechanisms: stretched=%0d normal=%0d pa_steps=%0d slow=%0d/%0d/%0d/%0d fast_recover=%0d detect=%0d",
             n_stretched, n_normal, n_pa_steps, n_slow[1], n_slow[2], n_slow[3], n_slow[4],
             n_fast_recover, n_detect);
    check(n_stretched > 0, "stretched cycle never happened");
    check(n_pa_steps > 0, "phase accumulator never stepped");
    for (int i = 1; i <= 4; i++) check(n_slow[i] > 0, $sformatf("delay element %0d never took the slow path", i));
    check(n_fast_recover > 0, "fast path never re-enabled");
    check(n_detect >= 3, "detector did not fire for each droop below threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
