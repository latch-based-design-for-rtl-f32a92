`timescale 1ps/1ps
// droop_response_top: clock frequency adaptation against supply droops.
//
// The input clock (twice the output rate) feeds a phase accumulator, whose
// output clock passes through a chain of N_DELAY_ELEMENTS delay elements to
// clk_out. The droop detector's active-low output enters the rightmost
// element (the one that drives clk_out) and is passed one element to the left
// per cycle, through each element's synchronizer stage, until it reaches the
// phase accumulator. The element that samples a droop delays its next output
// edge by T/4 at once. The same sample then delays the next edge of each
// element to its left in turn, and finally advances the phase accumulator for
// good. Together these keep every later edge delayed as well. Net effect: each
// cycle in which the detector reports a droop lengthens one output period from
// T to 5T/4, one to two cycles after the sample. Because the synchronizer
// chain only adds delay while it resolves, the response does not wait for
// synchronisation.
//
// Follows the source design: the chain of one phase accumulator and four delay
// elements and the inverted clock input of the phase accumulator. This
// design's own choices: the detector is clocked by clk_in and drives the chain
// directly; one active-low reset reaches every block. As in the source design
// the reset passes through a latch clocked by the accumulator's output clock
// before it enters the accumulator; this design also uses the reset itself as
// that latch's asynchronous clear, so assertion acts at once.
//
// Interface: clk_in (400 MHz), rst_n (active low), test_droop_vdd_mv (the
// detector's test supply in millivolts); clk_out (200 MHz), calibrate_out,
// detect_out (detector outputs, detect_out = 0 means droop).
//
// Lint note: rst_n reaches asynchronous resets and the T2 release flip-flop of
// the phase accumulator, so a linter reports it as used both ways; intended.
module droop_response_top
  import droop_pkg::*;
#(
  parameter int unsigned N_DELAY_ELEMENTS = 4
) (
  input  logic        clk_in,
  input  logic        rst_n,
  input  int unsigned test_droop_vdd_mv,
  output logic        clk_out,
  output logic        calibrate_out,
  output logic        detect_out
);
  // clk[0] is the phase accumulator output, clk[i] the output of element i.
  logic [N_DELAY_ELEMENTS:0] clk;
  // e[i] is the droop signal entering element i from the right;
  // e[0] is the phase accumulator's G_IN.
  logic [N_DELAY_ELEMENTS:0] e;

  // Reset latch in front of the phase accumulator: transparent while the
  // accumulator's output clock is low. Reset takes effect at once; its release
  // reaches the accumulator only while clk[0] is low.
  logic pa_rst_n;
  d_latch u_rst_latch (.d(rst_n), .gn(clk[0]), .rn(rst_n), .q(pa_rst_n));

  phase_accumulator u_pa (
    .clk_in(~clk_in), .r_in(pa_rst_n), .g_in(e[0]), .clk_out(clk[0])
  );

  for (genvar i = 1; i <= N_DELAY_ELEMENTS; i++) begin : g_de
    delay_element u_de (
      .clk_in(clk[i-1]), .rst_n(rst_n), .e_in(e[i]),
      .clk_out(clk[i]), .e_out(e[i-1])
    );
  end

  droop_detector u_det (
    .clk_in(clk_in), .test_vdd_mv(test_droop_vdd_mv),
    .calibrate_out(calibrate_out), .detect_out(detect_out)
  );

  assign e[N_DELAY_ELEMENTS] = detect_out;
  assign clk_out = clk[N_DELAY_ELEMENTS];
endmodule
