`timescale 1ps/1ps
// tb_delay_line: random pulse train, some pulses shorter than the delay. The
// output is sampled at random times and must equal the input as it was
// DELAY_PS earlier (transport delay), reconstructed from a log of input edges.
module tb_delay_line;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask
  localparam int unsigned D = 1250;
  logic in = 1'b0, out;
  delay_line #(.DELAY_PS(D)) dut (.in(in), .out(out));

  time  t_log[$];
  logic v_log[$];
  function automatic logic in_at(input time t);
    logic v = 1'b0;
    foreach (t_log[i]) if (t_log[i] <= t) v = v_log[i];
    return v;
  endfunction

  initial begin
    t_log.push_back(0); v_log.push_back(1'b0);
    fork
      begin
        for (int i = 0; i < 300; i++) begin
          #($urandom_range(2000, 50));
          in = ~in;
          t_log.push_back($time); v_log.push_back(in);
        end
      end
      begin
        #(D + 1);
        for (int i = 0; i < 600; i++) begin
          #($urandom_range(700, 1));
          #0;
          if (($time - t_log[t_log.size()-1]) != 0)
            check(out == in_at($time - D), $sformatf("out=%b at %0t", out, $time));
        end
      end
    join
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
