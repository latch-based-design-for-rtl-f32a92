`timescale 1ps/1ps
// mc_latch_core: behavioural model of the bistable storage inside a masking latch.
//
// Not synthesizable logic. It stands for the synchronizer-grade D latch at the
// heart of the mask-0 and mask-01 latches, and models the one property the
// rest of the design depends on: metastability. The latch is transparent
// while gn = 0 and closes on the rising edge of gn. If d changed less than
// SETUP_PS before that closing edge, the storage loop is left at mid-rail:
// `meta` goes to 1 and stays there for a resolution time
//     t_res = TAU_PS * (1 + ln(SETUP_PS / max(dt, 1 ps)))
// (dt = time from the data change to the closing edge), after which the loop
// settles to a random value. Opening the latch again (gn = 0) or reset (rn = 0)
// ends metastability at once. tau = 108 ps is the value quoted for the
// mask-01 latch; the window, the resolution law and the random outcome are
// this model's assumptions. rn = 0 stores 0, like every latch of the design.
//
// Interface: d, gn (negative enable), rn (active-low reset) in; q_int (stored
// value, meaningful while meta = 0) and meta out. Outputs change with no delay;
// the wrapping latches add their output delay.
//
// Lint notes: the resolution wait is a run-time value (at least TAU_PS); the
// model uses blocking assignments in event-controlled processes on purpose,
// since it describes analog behaviour in time, not clocked logic.
module mc_latch_core #(
  parameter int unsigned SETUP_PS = 20,
  parameter int unsigned TAU_PS   = 108
) (
  input  logic d,
  input  logic gn,
  input  logic rn,
  output logic q_int,
  output logic meta
);
  time         t_d;          // time of the last data change
  logic        d_q;          // d as seen on the previous evaluation
  logic        gn_q;         // gn as seen on the previous evaluation
  int unsigned gen;          // counts metastable episodes
  int unsigned res_gen;      // episode the resolver last finished
  time         res_dur;      // resolution time of the current episode
  logic        res_tick;     // toggled by the resolver

  initial begin
    t_d      = 0;
    d_q      = 1'b0;
    gn_q     = 1'b1;
    gen      = 0;
    res_gen  = 0;
    res_dur  = 0;
    res_tick = 1'b0;
    q_int    = 1'b0;
    meta     = 1'b0;
  end

  // Storage loop: reset, transparency, closing edge, resolution.
  always @(d or gn or rn or res_tick) begin
    if (d != d_q) t_d = $time;
    if (!rn) begin
      q_int = 1'b0;
      meta  = 1'b0;
    end else if (!gn) begin
      q_int = d;
      meta  = 1'b0;
    end else if (!gn_q) begin
      // Closing edge: was the data stable long enough?
      if (($time - t_d) < time'(SETUP_PS)) begin
        res_dur = time'(TAU_PS) + time'($rtoi(real'(TAU_PS) *
                  $ln(real'(SETUP_PS) / real'(($time > t_d) ? ($time - t_d) : 1))));
        gen  = gen + 1;
        meta = 1'b1;
      end
    end else if (meta && res_gen == gen) begin
      q_int = 1'($urandom_range(1, 0));
      meta  = 1'b0;
    end
    d_q  = d;
    gn_q = gn;
  end

  // Resolver: lets the loop settle res_dur after it went metastable. An
  // episode cut short by reopening the latch is ignored by its generation.
  always @(posedge meta) begin
    int unsigned my_gen;
    my_gen = gen;
    #(res_dur);
    res_gen  <= my_gen;
    res_tick <= ~res_tick;
  end
endmodule
