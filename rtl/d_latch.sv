`timescale 1ps/1ps
// d_latch: plain D latch with negative enable and active-low reset.
//
// Transparent while gn = 0, holds while gn = 1. rn = 0 clears the output
// asynchronously. As in the rest of the design, a latch resets to 0, which is
// also the value the active-low droop signal has while a droop is reported.
// This latch is the intended storage element (used as the second-stage latch
// of each delay element and as the sampling latch of the phase accumulator),
// so the latch a linter infers here is deliberate. Metastability of this plain
// latch is not modelled.
//
// Timing: q follows d with no delay while transparent.
//
// Lint note: when the whole design is flattened, a linter may report that no
// latch was found in this process for one instance; the process holds q
// whenever gn = 1, so it is a latch by construction.
module d_latch (
  input  logic d,
  input  logic gn,
  input  logic rn,
  output logic q
);
  always_latch begin
    if (!rn)      q = 1'b0;
    else if (!gn) q = d;
  end
endmodule
