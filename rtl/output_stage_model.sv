// Behavioural model (not synthesizable logic) of the trimmable three-state
// output stage of the FI-DIGOTA: pull-up pMOS M5 and pull-down nMOS M6.
//
// While voutp_n is low, M5 sources ip into the OUT node (the counter
// electrode); while voutn is high, M6 sinks in from it; otherwise the output
// is high-impedance and iout is zero. Each device's strength is set by its
// own 8-bit calibration word, as in the paper. The paper does not give the
// weighting of the bits; this model takes them as binary weighted, so
// ip = cal_p * IP_UNIT and in = cal_n * IN_UNIT, and treats both currents as
// constant, independent of the output voltage (the paper's "nearly constant
// current"). The default unit current is Ion = 8.1 nA of Table II (Vdd =
// 0.4 V) for a calibration word of 1, the setting used in the paper's
// comparison table. iout is positive when current flows out of OUT.
// Timing: combinational; iout follows its inputs immediately.
module output_stage_model
  import digota_pkg::*;
#(
  parameter real IP_UNIT = 8.1e-9,  // pull-up current per unit of cal_p [A]
  parameter real IN_UNIT = 8.1e-9   // pull-down current per unit of cal_n [A]
) (
  input  logic             voutp_n,  // gate of M5, low = on
  input  logic             voutn,    // gate of M6, high = on
  input  logic [CAL_W-1:0] cal_p,    // pMOS strength word
  input  logic [CAL_W-1:0] cal_n,    // nMOS strength word
  output real              iout      // current out of OUT [A]
);

  real ip, in_;
  always_comb begin
    ip   = IP_UNIT * real'(cal_p);
    in_  = IN_UNIT * real'(cal_n);
    iout = (!voutp_n ? ip : 0.0) - (voutn ? in_ : 0.0);
  end

endmodule
