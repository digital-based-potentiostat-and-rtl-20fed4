// Test of the FI input-stage model on its own, with the common-mode current
// driven by hand in place of the CM compensator.
// Checks, against figures worked out here from the Table II values:
//   - with i_cm = +Icm and vd = 0 both nodes ramp up at about Icm/Cfi
//     (0.42 mV/us) and the buffers switch together;
//   - with i_cm = -Icm both nodes ramp down, also together;
//   - with vd > 0, vib2 crosses first going up and vib1 first going down,
//     i.e. the (vq1,vq2) = (0,1) state the paper assigns to vd > 0; with
//     vd < 0, vib1 rises faster and vib2 falls faster;
//   - the nodes stay within the rails.
`timescale 1ns / 1ps
module tb_fi_input_stage_model;

  localparam real VDD = 0.4, ICM = 0.8e-12, CFI = 1.9e-15, TSTEP = 1.0e-6;

  logic tick = 1'b0;
  real  vinp = 0.2, vinn = 0.2;
  real  i_cm = 0.0;
  logic vd1, vd2;
  real  vib1, vib2;

  always #500 tick = ~tick;

  fi_input_stage_model dut (.tick, .vinp, .vinn, .i_cm,
                            .vd1, .vd2, .vib1, .vib2);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Ramp in the present direction until both buffers reach 'level';
  // returns the tick counts at which vd1 and vd2 got there.
  task automatic ramp(input logic level, output int t1, output int t2);
    int t = 0;
    t1 = -1; t2 = -1;
    while ((t1 < 0 || t2 < 0) && t < 2000) begin
      @(posedge tick);
      #1;
      t++;
      if (t1 < 0 && vd1 == level) t1 = t;
      if (t2 < 0 && vd2 == level) t2 = t;
      check(vib1 >= 0.0 && vib1 <= VDD && vib2 >= 0.0 && vib2 <= VDD, "within rails");
    end
  endtask

  initial begin
    int t1, t2;
    real v0, slope;
    // Charge up, vd = 0: both rise together from 10 mV below threshold.
    @(negedge tick);
    i_cm = ICM;
    @(posedge tick); #1;
    check(vd1 == 1'b0 && vd2 == 1'b0, "both buffers low at start");
    v0 = vib1;
    repeat (10) @(posedge tick);
    #1;
    slope = (vib1 - v0) / (10 * TSTEP);
    // Icm/Cfi = 421 V/s; the ro term adds at most 15 %.
    check(slope > 0.9 * ICM / CFI && slope < 1.2 * ICM / CFI,
          $sformatf("charge-up slope %g V/s, expected about %g", slope, ICM / CFI));
    check(vib1 == vib2, "vd = 0: nodes identical");
    ramp(1'b1, t1, t2);
    check(t1 == t2 && t1 > 0, "vd = 0: both buffers switch together");
    // Discharge: both fall, at the same rate and together.
    @(negedge tick);
    i_cm = -ICM;
    @(posedge tick); #1;
    v0 = vib1;
    repeat (10) @(posedge tick);
    #1;
    slope = (v0 - vib1) / (10 * TSTEP);
    check(slope > 0.8 * ICM / CFI && slope < 1.1 * ICM / CFI,
          $sformatf("discharge slope %g V/s, expected about %g", slope, ICM / CFI));
    ramp(1'b0, t1, t2);
    check(t1 == t2 && t1 > 0, "vd = 0: both fall together");
    // Positive input: gm*vd/2 = 0.2 pA for vd = 6.6 uV.
    vinp = 0.2 + 6.6e-6;
    @(negedge tick);
    i_cm = ICM;
    ramp(1'b1, t1, t2);
    check(t2 < t1, $sformatf("vd > 0 rising: vib2 first (t1=%0d t2=%0d)", t1, t2));
    @(negedge tick);
    i_cm = -ICM;
    ramp(1'b0, t1, t2);
    check(t1 < t2, $sformatf("vd > 0 falling: vib1 first (t1=%0d t2=%0d)", t1, t2));
    // Negative input: the reverse. The node difference left by the positive
    // input decays only through ro, so the slopes are compared instead.
    vinp = 0.2 - 6.6e-6;
    @(negedge tick);
    i_cm = ICM;
    @(posedge tick); #1;
    v0 = vib1 - vib2;
    repeat (3) @(posedge tick);
    #1;
    check((vib1 - vib2) > v0, "vd < 0 rising: vib1 rises faster");
    @(negedge tick);
    i_cm = -ICM;
    @(posedge tick); #1;
    v0 = vib1 - vib2;
    repeat (3) @(posedge tick);
    #1;
    check((vib1 - vib2) > v0, "vd < 0 falling: vib2 falls faster");
    // Large input: nodes saturate at the rails, never beyond.
    vinp = 0.3;
    @(negedge tick);
    i_cm = ICM;
    repeat (300) @(posedge tick);
    #1;
    check(vib2 == VDD && vib1 == 0.0, "large vd drives the nodes to the rails");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge tick);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
