// Behavioural model (not synthesizable logic) of the floating-inverter (FI)
// input stage M1-M4 of the FI-DIGOTA, its output capacitances C1/C2 and the
// two digital buffers that square its outputs into vd1 and vd2.
//
// How it works. Following the linearised model of the paper, each output
// node is its capacitance Cfi driven by the common-mode current supplied by
// the CM compensator, plus or minus half the transconductance current
// gm*vd/2, and loaded by the output resistance ro. Once per tick (TSTEP s):
//   Cfi * dvib1/dt = i_cm - gm*vd/2 - (vib1 - Vdd/2)/ro
//   Cfi * dvib2/dt = i_cm + gm*vd/2 - (vib2 - Vdd/2)/ro
// with vd = vinp - vinn; the nodes are clamped to the rails. Each buffer
// output is high while its node is above VTH. With vd > 0, vib2 rises faster
// and vib1 falls faster, so the logic network sees (vq1,vq2) = (0,1) between
// the two buffer transitions, the state the paper assigns to vd > 0; the
// opposite holds for vd < 0. The time between the transitions grows with
// |vd|: this is the voltage-to-time conversion.
// Follows the paper: the slopes (Icm +- gm*vd/2)/Cfi, ro in parallel with
// Cfi, and the default values of Table II (Vdd = 0.4 V: gm = 61 nS,
// ro = 89 GOhm, Cfi = 1.9 fF). Own choices: ro returning to Vdd/2, a
// threshold of Vdd/2 with no hysteresis or delay, and the starting point
// 10 mV below threshold.
// Timing: the nodes and the buffer outputs change on the rising edge of tick.
module fi_input_stage_model #(
  parameter real VDD   = 0.4,       // supply [V]
  parameter real GM    = 61.0e-9,   // input-stage transconductance [S]
  parameter real RO    = 89.0e9,    // output resistance [Ohm]
  parameter real CFI   = 1.9e-15,   // output-node capacitance [F]
  parameter real VTH   = 0.2,       // buffer threshold Vth,buff [V]
  parameter real TSTEP = 1.0e-6     // model time step, one tick [s]
) (
  input  logic tick,        // model time step
  input  real  vinp,        // + input [V]
  input  real  vinn,        // - input [V]
  input  real  i_cm,        // common-mode current from the CM compensator [A]
  output logic vd1,         // buffer output of vib1
  output logic vd2,         // buffer output of vib2
  output real  vib1,        // output node 1 [V]
  output real  vib2         // output node 2 [V]
);

  real v1, v2;

  initial begin
    v1 = VTH - 0.01;
    v2 = VTH - 0.01;
  end

  function automatic real clamp(input real v);
    if (v < 0.0) return 0.0;
    if (v > VDD) return VDD;
    return v;
  endfunction

  always @(posedge tick) begin
    real vd, i1, i2;
    vd = vinp - vinn;
    i1 = i_cm - GM * vd / 2.0 - (v1 - VDD / 2.0) / RO;
    i2 = i_cm + GM * vd / 2.0 - (v2 - VDD / 2.0) / RO;
    v1 <= clamp(v1 + i1 * TSTEP / CFI);
    v2 <= clamp(v2 + i2 * TSTEP / CFI);
  end

  assign vib1 = v1;
  assign vib2 = v2;
  assign vd1  = (v1 > VTH);
  assign vd2  = (v2 > VTH);

endmodule
