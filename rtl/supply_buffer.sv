`timescale 1ps/1ps
// supply_buffer: behavioural model of a buffer whose delay depends on its supply.
//
// Not synthesizable logic. Used on the droop test line of the droop detector,
// where the buffers run from a separate, adjustable supply. The delay in
// picoseconds is given by the delay_ps input, which the detector computes from
// that supply voltage. Each edge of `in` reappears at `out` after the delay in
// force when the edge arrived (transport delay; edges are queued so none is
// lost, and an edge never overtakes an earlier one).
//
// Interface: in, delay_ps (32 bits, ps); out.
//
// Lint note: the wait until the next queued edge is a run-time value, which a
// linter cannot prove non-zero; it is never negative and is zero only when two
// edges fall due at the same time.
module supply_buffer (
  input  logic        in,
  input  int unsigned delay_ps,
  output logic        out
);
  time  due_q[$];
  logic val_q[$];
  event pushed;

  initial out = 1'b0;

  always @(in) begin
    time due;
    due = $time + time'(delay_ps);
    if (due_q.size() != 0 && due < due_q[due_q.size()-1]) due = due_q[due_q.size()-1];
    due_q.push_back(due);
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
