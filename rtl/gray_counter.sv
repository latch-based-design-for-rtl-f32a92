`timescale 1ps/1ps
// gray_counter: 2-bit synchronous Gray-code up counter of the phase accumulator.
//
// The count selects which of the four clock phases drives the output. It
// advances on the FALLING edge of clk, and only when the enable gn is 0 (gn is
// the latched, active-low droop signal, so a droop sample makes it count). The
// code runs 00 -> 01 -> 11 -> 10 -> 00, so exactly one of c1/c0 changes per
// step; the multiplexer therefore never sees two select bits moving at once.
// The use of a Gray code and falling-edge counting follow the source design;
// the particular code and the asynchronous reset to 00 are this design's choice.
//
// Interface: clk, gn (count enable, active low), rn (reset, active low),
// c1/c0 (count). Timing: outputs change right after the falling clk edge.
//
// Lint note: rn resets the flip-flops asynchronously and also gates the
// step-check assertion, so a linter reports it as used both ways.
module gray_counter (
  input  logic clk,
  input  logic gn,
  input  logic rn,
  output logic c1,
  output logic c0
);
  always_ff @(negedge clk or negedge rn) begin
    if (!rn) begin
      c1 <= 1'b0;
      c0 <= 1'b0;
    end else if (!gn) begin
      // 00 -> 01 -> 11 -> 10 -> 00
      c1 <= c0;
      c0 <= ~c1;
    end
  end

  // A step must flip exactly one bit.
  logic p1, p0;
  always_ff @(negedge clk or negedge rn) begin
    if (!rn) begin
      p1 <= 1'b0;
      p0 <= 1'b0;
    end else begin
      p1 <= c1;
      p0 <= c0;
    end
  end
  // Before the first reset the state is undefined, so the check waits for it.
  bit seen_reset;
  initial seen_reset = 1'b0;
  always @(negedge rn) seen_reset <= 1'b1;
  a_one_bit: assert property (@(posedge clk) disable iff (!rn || !seen_reset)
                              ((p1 ^ c1) + (p0 ^ c0)) <= 1)
    else $error("gray_counter: more than one select bit changed");
endmodule
