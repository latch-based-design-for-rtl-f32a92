`timescale 1ps/1ps
// tb_droop_response_slow_clock: the whole design, all parameters at their
// defaults, run from an input clock 10 % slower than nominal (2750 ps instead
// of 2500 ps), which is how the design is meant to absorb delay variation
// beyond what its delay lines tolerate: the phases, and so the output period
// TP = 5500 ps and the phase step TP/4, follow the input clock, while the
// delay lines keep their nominal lengths. The checks are those of the nominal
// end-to-end test with T replaced by TP: periods TP or 5TP/4, constant
// 2250 ps high time, response within two cycles, one phase step per
// stretched period, and every mechanism seen. While a droop passes from the
// delay elements (T/4 + 100 ps = 1350 ps) to the accumulator (TP/4 = 1375 ps)
// a period may be off by that difference, inside the same tolerance.
module tb_droop_response_slow_clock;
  import droop_pkg::*;

  localparam int unsigned IN_PS = 2750;        // input clock period
  localparam int unsigned TP    = 2 * IN_PS;   // output period

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

  always #(IN_PS / 2) clk_in = ~clk_in;

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
      check(near(p, TP) || near(p, TP + TP / 4),
            $sformatf("period %0t is neither T nor 5T/4", p));
      if (near(p, TP + TP / 4)) n_stretched++;
      else n_normal++;
      if (edges_since_change >= 3) begin
        if (!detect_out)
          check(near(p, TP + TP / 4), $sformatf("period %0t during droop", p));
        else
          check(near(p, TP), $sformatf("period %0t outside droop", p));
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
