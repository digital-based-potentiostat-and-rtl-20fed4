// Test of the output-stage model: for random calibration words and every
// drive combination, iout must be +cal_p*IP_UNIT while only the pull-up is
// on, -cal_n*IN_UNIT while only the pull-down is on, zero when both are off
// (high impedance), and the difference if both were on.
`timescale 1ns / 1ps
module tb_output_stage_model;
  import digota_pkg::*;

  localparam real IPU = 4.89e-9;   // paper's ip at Vdd = 0.3 V, cal = 1
  localparam real INU = 10.16e-9;  // paper's in at Vdd = 0.3 V, cal = 1

  logic voutp_n, voutn;
  logic [CAL_W-1:0] cal_p, cal_n;
  real iout;

  output_stage_model #(.IP_UNIT(IPU), .IN_UNIT(INU)) dut (
    .voutp_n, .voutn, .cal_p, .cal_n, .iout
  );

  int checks = 0, failures = 0;

  initial begin
    real exp, err;
    for (int i = 0; i < 300; i++) begin
      cal_p = CAL_W'($urandom);
      cal_n = CAL_W'($urandom);
      if (i == 0) begin cal_p = 8'd1; cal_n = 8'd1; end
      if (i == 1) begin cal_p = 8'd255; cal_n = 8'd0; end
      for (int d = 0; d < 4; d++) begin
        voutp_n = d[0];
        voutn   = d[1];
        #1;
        exp = 0.0;
        if (!voutp_n) exp = exp + IPU * cal_p;
        if (voutn)    exp = exp - INU * cal_n;
        err = iout - exp;
        checks++;
        if (err > 1.0e-18 || err < -1.0e-18) begin
          failures++;
          $display("FAIL: cal_p=%0d cal_n=%0d p_n=%b n=%b iout=%g expected %g",
                   cal_p, cal_n, voutp_n, voutn, iout, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
