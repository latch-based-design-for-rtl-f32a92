`timescale 1ps/1ps
// tb_delay_element: one delay element driven by a 200 MHz clock with the
// pulse shape a preceding element produces (high 9T/20).
//
// Clean phase: e_in takes a random value v(k) 3 ns after input rise k, well
// outside the sampling window. The element samples v(k) in cycle k+1, so
// output rise k+2 must come 600 ps after the input rise (small delay + T/10
// trim) when v(k) = 1 and T/4 + 100 ps later (1950 ps) when v(k) = 0, and
// e_out must show v(k) before input rise k+2 (one stage per cycle). Every
// output pulse must be 9T/20 high.
// Metastable phase: e_in changes 1..10 ps before the first-stage latch closes.
// The first stage must go metastable, the output pulse must still be clean,
// and an edge may be delayed only if e_out passes a droop (0) on, so that no
// later edge can lose the delay again.
module tb_delay_element;
  import droop_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  localparam time FAST = time'(SMALL_PS + TENTH_PS);
  localparam time SLOW = FAST + time'(QUARTER_PS + SMALL_PS);
  localparam time CLOSE = time'(2 * SMALL_PS + QUARTER_PS);   // window closes

  logic clk = 1'b0, rst_n = 1'b1, e_in = 1'b1, clk_out, e_out;
  // Reset falls just after time 0 so that the asynchronous reset sees an edge.
  initial #1 rst_n = 1'b0;
  delay_element dut (.clk_in(clk), .rst_n(rst_n), .e_in(e_in), .clk_out(clk_out), .e_out(e_out));

  int   k = -1;                // input cycle number
  time  t_in [0:999];
  logic v [0:999];
  bit   meta_cycle [0:999];
  bit   meta_phase = 1'b0;
  int   n_fast = 0, n_slow = 0, n_meta = 0, n_meta_delayed = 0;
  time  t_out_rise;

  initial begin
    #20000 rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      clk = 1'b1;
      k++;
      t_in[k] = $time;
      meta_cycle[k] = meta_phase && ($urandom_range(1, 0) == 1);
      if (meta_cycle[k]) begin
        // Change just before the first stage closes.
        #(CLOSE - time'($urandom_range(10, 1)));
        e_in = ~e_in;
        v[k] = 1'bx;
        #(time'(T_PS * 9 / 20) - CLOSE);
      end else begin
        #(time'(T_PS * 9 / 20));
      end
      clk = 1'b0;
      #(time'(3000 - T_PS * 9 / 20));
      if (!meta_cycle[k]) begin
        e_in = 1'($urandom_range(1, 0));
        v[k] = e_in;
      end
      #(time'(T_PS - 3000));
      if (i == 200) meta_phase = 1'b1;
    end
    check(n_fast > 30 && n_slow > 30, "both paths used");
    check(n_meta > 20, "first stage went metastable");
    $display("fast=%0d slow=%0d metastable=%0d (delayed after metastability: %0d)",
             n_fast, n_slow, n_meta, n_meta_delayed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge dut.u_first.u_core.meta) n_meta++;

  // Output rise of cycle k: compare with the sample taken in cycle k-1.
  always @(posedge clk_out) begin
    time d;
    t_out_rise = $time;
    d = $time - t_in[k];
    if (k >= 6) begin
      check(d == FAST || d == SLOW, $sformatf("edge delay %0t", d));
      if (!meta_cycle[k-2] && !meta_cycle[k-1]) begin
        check(d == (v[k-2] ? FAST : SLOW), $sformatf("edge %0d delay %0t for sample %b", k, d, v[k-2]));
      end
      if (d == SLOW) n_slow++; else n_fast++;
      if (meta_cycle[k-2] && d == SLOW) n_meta_delayed++;
    end
  end
  always @(negedge clk_out) if (k >= 6)
    check($time - t_out_rise == time'(QUARTER_PS + FIFTH_PS), $sformatf("high time %0t", $time - t_out_rise));

  // e_out just before input rise k: holds the sample from cycle k-1, i.e. v(k-2).
  always @(posedge clk) begin
    if (k >= 5) begin
      if (!meta_cycle[k-1] && !meta_cycle[k-2])
        check(e_out == v[k-2], $sformatf("e_out=%b expected %b", e_out, v[k-2]));
      // Delay applied to the coming edge implies a droop handed on.
      if (!dut.fast_en) check(e_out == 1'b0, "edge will be delayed but e_out does not pass the droop on");
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
