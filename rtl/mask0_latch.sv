`timescale 1ps/1ps
// mask0_latch: behavioural model of the 0-masking latch (Mask-0 latch).
//
// Not synthesizable logic: a custom latch cell. A synchronizer-grade D latch
// (mc_latch_core) drives a differential sensor of two nMOS/pMOS pairs instead
// of the usual output inverter. The sensor's nMOS devices conduct only when the
// two storage nodes are far apart, so while the storage loop is metastable
// (both nodes near VDD/2) both sensor nodes are pulled up and both outputs,
// taken through inverters, read 0. Once the loop resolves, q0 = Q and
// q0_n = QN. A metastable sample therefore shows at q0 as a stable 0 followed
// by at most one late rising edge, never as a mid-rail level. This model
// reproduces that output behaviour, not the transistors.
//
// Interface: d, gn (transparent while 0, closes on its rising edge), rn
// (active-low reset, outputs q0 = 0, q0_n = 1); q0, q0_n out. Timing: outputs
// follow the storage loop after CQ_PS.
module mask0_latch #(
  parameter int unsigned SETUP_PS = 20,
  parameter int unsigned TAU_PS   = 108,
  parameter int unsigned CQ_PS    = 30
) (
  input  logic d,
  input  logic gn,
  input  logic rn,
  output logic q0,
  output logic q0_n
);
  logic q_int, meta;

  mc_latch_core #(.SETUP_PS(SETUP_PS), .TAU_PS(TAU_PS)) u_core (
    .d(d), .gn(gn), .rn(rn), .q_int(q_int), .meta(meta)
  );

  // Differential sensor: both outputs 0 while the loop is metastable.
  logic s_q0, s_q0_n;
  always_comb begin
    s_q0   = !meta &&  q_int;
    s_q0_n = !meta && !q_int;
  end

  // Output delay of the sensor and its inverters.
  delay_line #(.DELAY_PS(CQ_PS)) u_dly_q0  (.in(s_q0),   .out(q0));
  delay_line #(.DELAY_PS(CQ_PS)) u_dly_q0n (.in(s_q0_n), .out(q0_n));
endmodule
