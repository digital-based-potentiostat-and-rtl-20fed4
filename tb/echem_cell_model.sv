// Behavioural model of the three-electrode electrochemical cell, for
// testbenches only.
//
// The working electrode is the Randles equivalent of the mesoporous Pt
// microdisc, charge-transfer resistance RP in parallel with the double-layer
// capacitance CP (220 MOhm and 7 nF, the values extracted for the
// microelectrode), with the faradaic current i_f drawn from the node formed by
// the counter and reference electrodes. The counter-electrode impedance and
// the solution resistance are neglected, so RE and CE are one node vre, and
// no current flows into RE. Per tick of TSTEP seconds:
//   CP * dvre/dt = iout - i_f - (vre - V0)/RP
// where iout is the current delivered by the potentiostat and V0 the
// potential at which RP carries no current (the regulation point), so that
// in steady state the potentiostat supplies exactly i_f.
module echem_cell_model #(
  parameter real CP    = 7.0e-9,
  parameter real RP    = 220.0e6,
  parameter real V0    = 0.2,
  parameter real TSTEP = 1.0e-6
) (
  input  logic tick,
  input  real  iout,   // potentiostat output current into CE [A]
  input  real  i_f,    // faradaic current [A]
  output real  vre     // reference-electrode potential [V]
);

  real v;
  initial v = V0;

  always @(posedge tick)
    v <= v + (iout - i_f - (v - V0) / RP) * TSTEP / CP;

  assign vre = v;

endmodule
