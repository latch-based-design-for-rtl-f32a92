`timescale 1ps/1ps
// mask01_latch: behavioural model of the latch with 0- and 1-masking outputs.
//
// Not synthesizable logic: a custom latch cell. It is the mask-0 latch with a
// second inverter on each sensor output: q1 = NOT q0_n and q1_n = NOT q0. While
// the internal latch is metastable, q0 = q0_n = 0 and so q1 = q1_n = 1; once it
// resolves, q0 = q1 = Q and q0_n = q1_n = QN. In the delay element it is the
// first synchronizer stage: q0 goes to the data path (a metastable sample is
// passed on as 0, "droop") and q1 to the clock-path latch (a metastable sample
// is passed on as 1, "no extra delay"), so at most one of the two downstream
// latches can see a late edge.
//
// Interface: d, gn (transparent while 0), rn (active-low reset: q0 = q1 = 0);
// q0, q0_n, q1, q1_n out. Timing: outputs follow the storage loop after CQ_PS.
module mask01_latch #(
  parameter int unsigned SETUP_PS = 20,
  parameter int unsigned TAU_PS   = 108,
  parameter int unsigned CQ_PS    = 30
) (
  input  logic d,
  input  logic gn,
  input  logic rn,
  output logic q0,
  output logic q0_n,
  output logic q1,
  output logic q1_n
);
  logic q_int, meta;

  mc_latch_core #(.SETUP_PS(SETUP_PS), .TAU_PS(TAU_PS)) u_core (
    .d(d), .gn(gn), .rn(rn), .q_int(q_int), .meta(meta)
  );

  logic s_q0, s_q0_n;
  always_comb begin
    s_q0   = !meta &&  q_int;
    s_q0_n = !meta && !q_int;
  end

  // Output delay of the sensor and its inverters.
  delay_line #(.DELAY_PS(CQ_PS)) u_dly_q0  (.in(s_q0),   .out(q0));
  delay_line #(.DELAY_PS(CQ_PS)) u_dly_q0n (.in(s_q0_n), .out(q0_n));

  // Second inverters of the 1-masking pair.
  assign q1   = ~q0_n;
  assign q1_n = ~q0;
endmodule
