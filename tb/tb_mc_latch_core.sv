`timescale 1ps/1ps
// tb_mc_latch_core: tests the storage core: a sample with stable data is
// stored without metastability; a data change inside the 20 ps window before
// the latch closes leaves meta = 1 for at least tau and at most tau*(1+ln 20),
// after which the value is 0 or 1 (both outcomes must be seen); reopening the
// latch or reset ends metastability at once. The 20 ps window and the
// resolution law are the model's own assumptions; tau = 108 ps is the quoted
// value for the mask-01 latch.
module tb_mc_latch_core;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  localparam int unsigned CQ = 0;
  logic d = 1'b0, gn = 1'b1, rn = 1'b0;
  logic q, meta;
  mc_latch_core dut (.d(d), .gn(gn), .rn(rn), .q_int(q), .meta(meta));

  int n_q_edges = 0;
  always @(q) n_q_edges++;

  initial begin
    logic dval;
    int n_meta = 0, n_res0 = 0, n_res1 = 0;
    #100;
    rn = 1'b1;
    // Stable samples.
    for (int i = 0; i < 40; i++) begin
      dval = 1'($urandom_range(1, 0));
      gn = 1'b0;
      #50 d = dval;
      #200 gn = 1'b1;
      #(CQ + 5);
      check(!meta && q == dval, $sformatf("stable sample: q=%b meta=%b want %b", q, meta, dval));
      #100 d = ~dval;          // data moves while closed: no effect
      #50;
      check(!meta && q == dval, $sformatf("stable sample: q=%b meta=%b want %b", q, meta, dval));
    end
    // Window violations: data changes 1..15 ps before the latch closes.
    for (int i = 0; i < 60; i++) begin
      gn = 1'b0;
      d = 1'b0;
      #300;
      d = 1'b1;
      #($urandom_range(15, 1));
      gn = 1'b1;
      #(CQ + 5);
      n_q_edges = 0;   // count from the closing edge as seen at the output
      check(meta == 1'b1, "data change inside the window must leave the loop metastable");
      #(1000);
      check(!meta, "metastability must resolve within tau*(1+ln(window))");
      check(n_q_edges <= 1, "at most one late output transition");
      n_meta++;
      if (dut.q_int) n_res1++; else n_res0++;
    end
    check(n_res0 > 0 && n_res1 > 0, "metastability resolved both ways");
    // Reopening the latch ends metastability.
    gn = 1'b0; d = 1'b0; #300;
    d = 1'b1; #2; gn = 1'b1; #50;
    gn = 1'b0; #(CQ + 5);
    dval = 1'b1;
    check(!meta && q == dval, $sformatf("stable sample: q=%b meta=%b want %b", q, meta, dval));
    // Reset clears.
    gn = 1'b1; #50 rn = 1'b0; #(CQ + 5);
    check(q == 1'b0, "reset stores 0");
    $display("metastable samples: %0d (resolved to 0: %0d, to 1: %0d)", n_meta, n_res0, n_res1);
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
