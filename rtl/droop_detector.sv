`timescale 1ps/1ps
// droop_detector: behavioural model of the delay-line droop detector macro.
//
// Not synthesizable logic: a hard macro whose function depends on how the
// supply voltage slows its buffers. The clock enters two buffer lines. The
// reference line has X_BUFFERS + 2 buffers on the normal supply. The droop
// test line has X_BUFFERS buffers powered from test_vdd_mv, an analog supply
// (given here in millivolts). At nominal supply the test line is two buffers
// faster. Two flip-flops compare the arrival times:
//   calibrate: D = reference line end, clocked by the test line end
//   detect:    D = test line end,      clocked by the reference line end
// At nominal supply the test edge arrives first, so calibrate_out = 0 and
// detect_out = 1. When a droop slows the test line past the reference line,
// both flip. detect_out is thus an active-low "droop detected" that can drive
// the delay-element chain directly. (The wiring follows the source design's
// schematic. Its prose states the opposite output levels. The schematic was
// kept because the chain expects an active-low droop signal.)
//
// Buffer delay model (this design's own choice): a reference buffer takes
// BUF_PS; a test buffer takes BUF_PS * (VNOM_MV - VTH_MV) / (V - VTH_MV). With
// the defaults the test line becomes slower than the reference below about
// 971 mV.
//
// Interface: clk_in, test_vdd_mv (32-bit millivolts); calibrate_out,
// detect_out. Timing: outputs change one reference-line delay after clk_in
// rises.
module droop_detector #(
  parameter int unsigned X_BUFFERS = 5,
  parameter int unsigned BUF_PS    = 100,
  parameter int unsigned VNOM_MV   = 1200,
  parameter int unsigned VTH_MV    = 400
) (
  input  logic        clk_in,
  input  int unsigned test_vdd_mv,
  output logic        calibrate_out,
  output logic        detect_out
);
  // Delay of one buffer on the droop test line at the present test supply.
  int unsigned test_buf_ps;
  always_comb begin
    if (test_vdd_mv <= VTH_MV + 1) test_buf_ps = BUF_PS * (VNOM_MV - VTH_MV);
    else test_buf_ps = BUF_PS * (VNOM_MV - VTH_MV) / (test_vdd_mv - VTH_MV);
  end

  logic [X_BUFFERS+2:0] ref_n;    // reference line taps
  logic [X_BUFFERS:0]   test_n;   // droop test line taps
  assign ref_n[0]  = clk_in;
  assign test_n[0] = clk_in;

  for (genvar i = 0; i < X_BUFFERS + 2; i++) begin : g_ref
    delay_line #(.DELAY_PS(BUF_PS)) u_buf (.in(ref_n[i]), .out(ref_n[i+1]));
  end
  for (genvar i = 0; i < X_BUFFERS; i++) begin : g_test
    supply_buffer u_buf (.in(test_n[i]), .delay_ps(test_buf_ps), .out(test_n[i+1]));
  end

  logic ref_out, test_out;
  assign ref_out  = ref_n[X_BUFFERS+2];
  assign test_out = test_n[X_BUFFERS];

  always_ff @(posedge test_out) calibrate_out <= ref_out;
  always_ff @(posedge ref_out)  detect_out    <= test_out;
endmodule
