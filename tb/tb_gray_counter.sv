`timescale 1ps/1ps
// tb_gray_counter: counts on falling clock edges with a random active-low
// enable. The expected output is the Gray code b ^ (b >> 1) of a binary
// reference count b; at most one bit may change per edge, and nothing may
// change on a rising edge.
module tb_gray_counter;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  logic clk = 1'b0, gn = 1'b1, rn = 1'b1, c1, c0;
  // Reset falls just after time 0 so that the asynchronous reset sees an edge.
  initial #1 rn = 1'b0;
  gray_counter dut (.clk(clk), .gn(gn), .rn(rn), .c1(c1), .c0(c0));
  always #2500 clk = ~clk;

  int unsigned b = 0;
  logic [1:0] prev;
  initial begin
    int steps = 0, wraps = 0;
    #1000;
    check({c1, c0} == 2'b00, "reset to 00");
    @(posedge clk) rn = 1'b1;
    prev = {c1, c0};
    for (int i = 0; i < 200; i++) begin
      @(posedge clk);
      #1;
      check({c1, c0} == prev, "changed on a rising edge");
      gn = 1'($urandom_range(1, 0));
      @(negedge clk);
      if (!gn) begin
        b = (b + 1) % 4;
        steps++;
        if (b == 0) wraps++;
      end
      #1;
      check({c1, c0} == 2'(b ^ (b >> 1)), $sformatf("count %b%b expected gray of %0d", c1, c0, b));
      check(((prev[1] ^ c1) + (prev[0] ^ c0)) <= 1, "more than one bit changed");
      prev = {c1, c0};
    end
    check(steps > 50 && wraps > 5, "counted and wrapped");
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
