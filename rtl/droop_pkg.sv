`timescale 1ps/1ps
// droop_pkg: timing constants shared by the clock-adaptation blocks.
//
// All delays are in picoseconds. T is the period of the adapted output clock
// (200 MHz, so T = 5 ns); the chip input clock runs at twice that rate. Every
// delay line in the design is a fixed fraction of T: the phase accumulator's
// select delay (T/3), the delay element's quarter-period line (T/4), and the
// pulse shaper's trim (T/10) and two shaping delays (T/4 and T/5 in the
// built design, T/3 and T/6 in the idealised version). The "small" delay and
// the latch timing numbers are this design's own choices.
// A linter checking this package on its own reports the constants as unused;
// the modules that import it use them.
package droop_pkg;
  parameter int unsigned T_PS       = 5000;          // output clock period T
  parameter int unsigned T_IN_PS    = T_PS / 2;      // input clock period (2x rate)
  parameter int unsigned QUARTER_PS = T_PS / 4;      // one phase step, T/4
  parameter int unsigned THIRD_PS   = T_PS / 3;      // counter-to-mux delay, T/3
  parameter int unsigned TENTH_PS   = T_PS / 10;     // pulse shaper trim, T/10
  parameter int unsigned FIFTH_PS   = T_PS / 5;      // pulse shaper second delay, T/5
  parameter int unsigned SMALL_PS   = 100;           // "small delay" in the delay element

  // Masking-latch behavioural timing.
  parameter int unsigned LATCH_SETUP_PS = 20;        // metastability window before closing
  parameter int unsigned LATCH_TAU_PS   = 108;       // resolution time constant tau
  parameter int unsigned LATCH_CQ_PS    = 30;        // clock/data-to-output delay
endpackage
