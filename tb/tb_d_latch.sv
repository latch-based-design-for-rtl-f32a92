`timescale 1ps/1ps
// tb_d_latch: random stimulus on d, gn and rn against a reference model of a
// negative-enable latch with active-low reset. After every change the output
// must equal the reference.
module tb_d_latch;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  logic d = 1'b0, gn = 1'b1, rn = 1'b0, q;
  logic exp_q = 1'b0;
  d_latch dut (.d(d), .gn(gn), .rn(rn), .q(q));

  initial begin
    int n_hold = 0, n_pass = 0;
    #5;
    check(q == 1'b0, "reset value");
    rn = 1'b1;
    for (int i = 0; i < 400; i++) begin
      d  = 1'($urandom_range(1, 0));
      gn = 1'($urandom_range(1, 0));
      rn = ($urandom_range(15, 0) != 0);
      if (!rn) exp_q = 1'b0;
      else if (!gn) exp_q = d;
      if (rn && gn) n_hold++;
      if (rn && !gn) n_pass++;
      #10;
      check(q == exp_q, $sformatf("q=%b expected %b (d=%b gn=%b rn=%b)", q, exp_q, d, gn, rn));
    end
    check(n_hold > 50 && n_pass > 50, "both modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
