`timescale 1ps/1ps
// tb_mask01_latch: tests the 0/1-masking latch: with stable data q0 = q1 = d
// and q0_n = q1_n = not d; after a data change inside the 20 ps window q0 =
// q0_n = 0 and q1 = q1_n = 1 until the loop resolves, then both pairs agree
// again, and each output makes at most one transition while the latch is
// closed. The masking rule is the cell's specification; the window and output
// delay are the model's assumptions.
module tb_mask01_latch;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  localparam int unsigned CQ = 30;
  logic d = 1'b0, gn = 1'b1, rn = 1'b0;
  logic q, qn, q1, q1n;
  mask01_latch dut (.d(d), .gn(gn), .rn(rn), .q0(q), .q0_n(qn), .q1(q1), .q1_n(q1n));

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
      check(q == dval && qn == !dval && q1 == dval && q1n == !dval, $sformatf("stable sample: %b%b%b%b want %b", q, qn, q1, q1n, dval));
      #100 d = ~dval;          // data moves while closed: no effect
      #50;
      check(q == dval && qn == !dval && q1 == dval && q1n == !dval, $sformatf("stable sample: %b%b%b%b want %b", q, qn, q1, q1n, dval));
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
      check(q == 1'b0 && qn == 1'b0 && q1 == 1'b1 && q1n == 1'b1, "0-pair must read 0 and 1-pair 1 while metastable");
      #(1000);
      check(q == !qn && q1 == q && q1n == qn, "outputs consistent after resolution");
      check(n_q_edges <= 1, "at most one late output transition");
      n_meta++;
      if (dut.u_core.q_int) n_res1++; else n_res0++;
    end
    check(n_res0 > 0 && n_res1 > 0, "metastability resolved both ways");
    // Reopening the latch ends metastability.
    gn = 1'b0; d = 1'b0; #300;
    d = 1'b1; #2; gn = 1'b1; #50;
    gn = 1'b0; #(CQ + 5);
    dval = 1'b1;
    check(q == dval && qn == !dval && q1 == dval && q1n == !dval, $sformatf("stable sample: %b%b%b%b want %b", q, qn, q1, q1n, dval));
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
