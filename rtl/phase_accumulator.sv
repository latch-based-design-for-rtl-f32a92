`timescale 1ps/1ps
// phase_accumulator: turns "droop" samples into a permanent T/4 phase step.
//
// The input clock runs at twice the output rate (period T/2). Two toggle
// flip-flops, T1 on the input clock and T2 on its inverse, divide it by two and
// give four copies of the output clock: Phase 0 = T1, Phase 1 = T2 (T/4
// later), Phase 2 = not T1 (T/2), Phase 3 = not T2 (3T/4). Because they come
// from flip-flops, the four phases are evenly spaced at any input period with
// no tuned delay line. A 4:1 multiplexer picks one phase as clk_out. Its
// select is a 2-bit Gray counter, passed through a T/3 delay line.
//
// Each cycle a D latch (transparent while clk_out is low) captures g_in, the
// active-low droop signal from the first delay element, at the rising edge of
// clk_out. On the following falling edge the counter advances if that sample
// was 0; T/3 later the multiplexer moves to the phase T/4 behind. At that
// moment both the old and the new phase are low, so the switch cannot glitch,
// and the new phase rises T/4 later than the old one would have: that cycle's
// low time grows by T/4 while its high time stays T/2. The Gray code makes each
// switch move only one select bit. The multiplexer wiring (inputs 0..3 =
// Phase 0, 1, 3, 2) together with the Gray sequence 00, 01, 11, 10 steps
// through Phase 0, 1, 2, 3 in order.
//
// Follows the source design: the T flip-flop divider, the mux, the Gray
// counter on the falling edge, the T/3 select delay and the latch. This
// design's own choices: the T flip-flops and the counter are reset by r_in,
// T2 is released only after T1's first toggle so that Phase 1 always
// lags Phase 0 (a T2 starting out of step would reverse the phase order);
// and the sampling latch is given an explicit 50 ps propagation delay.
//
// Interface: clk_in (period T/2), r_in (active-low reset), g_in (droop,
// active low); clk_out (period T, or T + T/4 in a cycle that sampled 0).
//
// Lint notes: r_in is the asynchronous reset of the flip-flops and also the
// data input of the flip-flop that releases T2, which a linter reports as a
// signal used both synchronously and asynchronously; that is intended. The
// counter outputs c1/c0 get the same report because they feed the counter's
// own step-checking flip-flops as well as the select delay lines.
module phase_accumulator
  import droop_pkg::*;
#(
  parameter int unsigned SEL_DELAY_PS  = THIRD_PS,
  parameter int unsigned LATCH_PROP_PS = 50
) (
  input  logic clk_in,
  input  logic r_in,
  input  logic g_in,
  output logic clk_out
);
  logic clk_in_p, clk_in_n;
  assign clk_in_p = clk_in;
  assign clk_in_n = ~clk_in;

  // T flip-flops with the toggle input tied high.
  logic t1_q, t2_q, t2_rn;
  always_ff @(posedge clk_in_p or negedge r_in) begin
    if (!r_in) begin
      t1_q  <= 1'b0;
      t2_rn <= 1'b0;
    end else begin
      t1_q  <= ~t1_q;
      t2_rn <= 1'b1;
    end
  end
  always_ff @(posedge clk_in_n or negedge t2_rn) begin
    if (!t2_rn) t2_q <= 1'b0;
    else        t2_q <= ~t2_q;
  end

  logic [3:0] phase;
  assign phase = {~t2_q, ~t1_q, t2_q, t1_q};   // Phase 3..0

  // Sampling latch for the droop signal. The latch opens on the same falling
  // edge at which the counter samples it; its propagation delay (longer than
  // the counter's hold time) is what keeps the counter from seeing the new
  // value, so it is modelled explicitly.
  logic droop_l, droop_q;
  d_latch u_latch (.d(g_in), .gn(clk_out), .rn(r_in), .q(droop_l));
  delay_line #(.DELAY_PS(LATCH_PROP_PS)) u_latch_dly (.in(droop_l), .out(droop_q));

  // Gray counter on the falling output edge, enabled by a droop sample.
  logic c1, c0;
  gray_counter u_cnt (.clk(clk_out), .gn(droop_q), .rn(r_in), .c1(c1), .c0(c0));

  // Select delay of about T/3.
  logic sel1, sel0;
  delay_line #(.DELAY_PS(SEL_DELAY_PS)) u_dly1 (.in(c1), .out(sel1));
  delay_line #(.DELAY_PS(SEL_DELAY_PS)) u_dly0 (.in(c0), .out(sel0));

  always_comb begin
    unique case ({sel1, sel0})
      2'd0: clk_out = phase[0];
      2'd1: clk_out = phase[1];
      2'd2: clk_out = phase[3];
      2'd3: clk_out = phase[2];
    endcase
  end
endmodule
