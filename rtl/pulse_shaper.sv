`timescale 1ps/1ps
// pulse_shaper: restores the clock high time at the end of a delay element.
//
// A delay element that lets a rising edge through early stretches that pulse
// by T/4; the shaper cuts every pulse back to a fixed high time. It has three
// stages, each a gate plus a delay line:
//   trim:  s1   = in AND in delayed by TRIM_PS (T/10)  - shortens the pulse,
//                 delays its rising edge by T/10
//   NAND1: n1   = NOT(s1 AND NOT s1 delayed by D1_PS)  - a low pulse of width
//                 D1 starting at each rising edge of s1
//   NAND2: out  = NOT(n1 AND n1 delayed by D2_PS)      - high from n1's fall
//                 until D2 after n1 rises again: high time D1 + D2
// So every rising input edge reappears TRIM_PS later and the output stays high
// for D1 + D2, whatever the input duty cycle, as long as s1 is high and low for
// at least D1 each and n1 is high for at least D2.
//
// The structure follows the source design (delay T/10, AND, delay, inverter,
// NAND1, delay, NAND2). Its idealised version uses
// delays T/3 and T/6 (high time T/2); the built design shortened them to T/4
// and T/5 for PVT margin, which are the defaults here (high time 9T/20).
// The delay lines are behavioural (delay_line); the gates are plain logic.
//
// Interface: clk_in, clk_out. Timing: clk_out rises TRIM_PS after clk_in
// rises and stays high for D1_PS + D2_PS. At power-up the delay lines hold 0,
// so the output is high for D2_PS once; the input clock is expected to stay low
// at boot-up until everything has settled.
module pulse_shaper
  import droop_pkg::*;
#(
  parameter int unsigned TRIM_PS = TENTH_PS,
  parameter int unsigned D1_PS   = QUARTER_PS,
  parameter int unsigned D2_PS   = FIFTH_PS
) (
  input  logic clk_in,
  output logic clk_out
);
  logic in_d, s1, s1_d, n1, n1_d;

  delay_line #(.DELAY_PS(TRIM_PS)) u_trim (.in(clk_in), .out(in_d));
  assign s1 = clk_in & in_d;

  delay_line #(.DELAY_PS(D1_PS)) u_d1 (.in(s1), .out(s1_d));
  assign n1 = ~(s1 & ~s1_d);                 // NAND1 with the inverter

  delay_line #(.DELAY_PS(D2_PS)) u_d2 (.in(n1), .out(n1_d));
  assign clk_out = ~(n1 & n1_d);             // NAND2
endmodule
