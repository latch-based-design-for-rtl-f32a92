`timescale 1ps/1ps
// delay_line: behavioural model of a long-delay buffer cell.
//
// Not synthesizable logic: in silicon this is a chain of dedicated long-delay
// buffer cells chosen for near-equal rise and fall delays, which synthesis must
// be told not to touch. Here it is an ideal transport delay: every edge at
// `in` reappears at `out` exactly DELAY_PS later, including pulses shorter than
// the delay. Pending edges wait in a queue (time due, value) that a second
// process drains, so a new input edge is never lost while an earlier one is
// still in flight. The output starts at 0.
//
// Interface: in -> out, one bit. Timing: out(t) = in(t - DELAY_PS).
//
// Lint note: the wait until the next queued edge is a run-time value, which a
// linter cannot prove non-zero; it is never negative and is zero only when two
// edges fall due at the same time.
module delay_line #(
  parameter int unsigned DELAY_PS = 1250
) (
  input  logic in,
  output logic out
);
  time  due_q[$];
  logic val_q[$];
  event pushed;

  initial out = 1'b0;

  always @(in) begin
    due_q.push_back($time + time'(DELAY_PS));
    val_q.push_back(in);
    -> pushed;
  end

  initial begin
    forever begin
      if (due_q.size() == 0) @(pushed);
      #(due_q[0] - $time);
      out = val_q[0];
      void'(due_q.pop_front());
      void'(val_q.pop_front());
    end
  end
endmodule
