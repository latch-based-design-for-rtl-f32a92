`timescale 1ps/1ps
// delay_element: one stage of the droop synchronizer that also delays the clock.
//
// Clock path. The incoming clock, after a small delay (clk_d), reaches the
// output two ways. The fast path goes through the "fast path filter" NAND
// (clk_d with the Mask-0 latch output fast_en) into the "path combining" NAND.
// The slow path goes through a T/4 delay line, an inverter and another small
// delay (clk_t4_n) into the other input of the same NAND. With fast_en = 1 a
// rising edge passes at once and the pulse is stretched by T/4. With
// fast_en = 0 only the slow path is open and the edge comes out T/4 later with
// its width kept. A pulse shaper then trims every pulse to a fixed high time.
//
// Synchronizer path. LATCH_GATE = clk_t4_n AND clk_in is high for about T/4
// after each rising input edge (clk_gated). During that window the first-stage
// Mask-01 latch is transparent and samples e_in; it closes when clk_t4_n falls.
// The two second-stage latches are opaque during the window and transparent
// for the rest of the cycle:
//   - a plain D latch takes the 0-masked output q0 and drives e_out, which the
//     element to the left samples in its next cycle (one stage per cycle);
//   - a Mask-0 latch takes the 1-masked output q1 and drives fast_en, which
//     decides the fast/slow path for the NEXT rising edge.
// The droop signal is active low: a 0 sample slows the next edge by T/4 and is
// handed left. If the first stage goes metastable, q1 is masked to 1 (no extra
// delay yet) and q0 to 0 (droop handed left), and at most one of the two
// second-stage latches can see a late edge. A late rise of fast_en can only
// move the output edge to a point between the fast and slow timings, never
// glitch it, and the droop is still handed on. The rule is that a clock edge
// is never delayed while the edges after it are not.
//
// Follows the source design: the structure and the gate types. This design's
// own choice: the small delays (SMALL_PS). All latches reset to 0, so after
// reset the element starts on the slow path and reports "droop" leftwards.
//
// Interface: clk_in, rst_n (active low), e_in (droop in, active low);
// clk_out, e_out. Timing: clk_out rises SMALL_PS + TRIM after clk_in, plus
// T/4 + SMALL_PS when the sample of the previous cycle was 0; e_out changes
// about T/4 after each rising clk_in.
//
// Lint notes: the complementary latch outputs m_q0_n, m_q1_n and fast_en_n are
// wired to named nets but not used; they exist on the real cells and are kept
// so that no cell pin is left open.
module delay_element
  import droop_pkg::*;
#(
  parameter int unsigned SMALL_DELAY_PS = SMALL_PS,
  parameter int unsigned QUARTER_DELAY_PS = QUARTER_PS
) (
  input  logic clk_in,
  input  logic rst_n,
  input  logic e_in,
  output logic clk_out,
  output logic e_out
);
  logic clk_d, clk_q, clk_q_n, clk_t4_n;
  logic clk_gated, clk_gated_n;
  logic m_q0, m_q0_n, m_q1, m_q1_n;
  logic fast_en, fast_en_n;
  logic fast_n, comb;

  // Clock paths.
  delay_line #(.DELAY_PS(SMALL_DELAY_PS))   u_small_in   (.in(clk_in),  .out(clk_d));
  delay_line #(.DELAY_PS(QUARTER_DELAY_PS)) u_quarter    (.in(clk_d),   .out(clk_q));
  assign clk_q_n = ~clk_q;
  delay_line #(.DELAY_PS(SMALL_DELAY_PS))   u_small_slow (.in(clk_q_n), .out(clk_t4_n));

  assign fast_n = ~(clk_d & fast_en);      // fast path filter gate
  assign comb   = ~(clk_t4_n & fast_n);    // path combining gate

  pulse_shaper u_shaper (.clk_in(comb), .clk_out(clk_out));

  // Synchronizer stage.
  assign clk_gated   = clk_t4_n & clk_in;  // LATCH_GATE
  assign clk_gated_n = ~clk_gated;

  mask01_latch u_first (
    .d(e_in), .gn(clk_gated_n), .rn(rst_n),
    .q0(m_q0), .q0_n(m_q0_n), .q1(m_q1), .q1_n(m_q1_n)
  );
  mask0_latch u_fast (
    .d(m_q1), .gn(clk_gated), .rn(rst_n), .q0(fast_en), .q0_n(fast_en_n)
  );
  d_latch u_data (.d(m_q0), .gn(clk_gated), .rn(rst_n), .q(e_out));
endmodule
