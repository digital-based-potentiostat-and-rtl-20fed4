// Open-loop test of the FI-DIGOTA with a fixed differential input.
//   vd = 0     : self-oscillation between (0,0) and (1,1), no output pulse,
//                iout always zero (output high-impedance);
//   vd > 0     : only (0,1) mixed states, only outP pulses, iout = +ip then;
//   vd < 0     : only (1,0), only outN pulses, iout = -in then;
//   larger |vd|: more active periods (voltage-to-time gain).
// Every clock period the state, the drives and iout are checked against each
// other with the rules stated in the paper.
`timescale 1ns / 1ps
module tb_fi_digota;
  import digota_pkg::*;

  localparam real IPU = 8.1e-9, INU = 8.1e-9;

  logic tick = 1'b0, clk = 1'b0, rst_n = 1'b0;
  real  vinp = 0.2, vinn = 0.2, iout, vib1, vib2;
  logic [CAL_W-1:0] cal_p = 8'd3, cal_n = 8'd5;
  logic voutp_n, voutn, vcmp;
  dff_state_e state;

  always #500 tick = ~tick;
  always #10000 clk = ~clk;

  fi_digota dut (.tick, .clk, .rst_n, .vinp, .vinn, .cal_p, .cal_n, .iout,
                 .voutp_n, .voutn, .state, .vcmp, .vib1, .vib2);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Run n clock periods at a given vd; count states and pulses.
  task automatic run(input real vd, input int n, output int c00, output int c11,
                     output int cpos, output int cneg, output int osc);
    dff_state_e prev;
    real exp;
    c00 = 0; c11 = 0; cpos = 0; cneg = 0; osc = 0;
    vinp = 0.2 + vd;
    prev = state;
    // The first 200 periods let the node difference left by the previous
    // input decay; the rules are checked there too, the states not counted.
    for (int i = -200; i < n; i++) begin
      @(posedge clk);
      #1;
      if (i >= 0) case (state)
        ST_BOTH_LOW:  c00++;
        ST_BOTH_HIGH: c11++;
        ST_POSITIVE:  cpos++;
        default:      cneg++;
      endcase
      if (i >= 0 && ((prev == ST_BOTH_LOW && state == ST_BOTH_HIGH) ||
                     (prev == ST_BOTH_HIGH && state == ST_BOTH_LOW))) osc++;
      prev = state;
      check((!voutp_n) == (state == ST_POSITIVE), "outP active exactly in (0,1)");
      check(voutn == (state == ST_NEGATIVE), "outN active exactly in (1,0)");
      exp = (state == ST_POSITIVE) ? IPU * cal_p : (state == ST_NEGATIVE) ? -INU * cal_n : 0.0;
      check(iout == exp, $sformatf("iout %g, expected %g", iout, exp));
    end
  endtask

  initial begin
    int c00, c11, cp, cn, osc, cp_small;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    run(0.0, 500, c00, c11, cp, cn, osc);
    $display("vd=0: (0,0)=%0d (1,1)=%0d (0,1)=%0d (1,0)=%0d transitions=%0d", c00, c11, cp, cn, osc);
    check(cp == 0 && cn == 0, "vd = 0: no output pulse");
    check(osc > 100 && c00 > 100 && c11 > 100, "vd = 0: self-oscillation");
    run(2.0e-6, 2000, c00, c11, cp, cn, osc);
    $display("vd=+2uV: (0,0)=%0d (1,1)=%0d (0,1)=%0d (1,0)=%0d", c00, c11, cp, cn);
    check(cp > 0 && cn == 0, "vd > 0: only outP");
    cp_small = cp;
    run(8.0e-6, 2000, c00, c11, cp, cn, osc);
    $display("vd=+8uV: (0,0)=%0d (1,1)=%0d (0,1)=%0d (1,0)=%0d", c00, c11, cp, cn);
    check(cp > cp_small && cn == 0, "larger vd gives more outP periods");
    run(-8.0e-6, 2000, c00, c11, cp, cn, osc);
    $display("vd=-8uV: (0,0)=%0d (1,1)=%0d (0,1)=%0d (1,0)=%0d", c00, c11, cp, cn);
    check(cn > 0 && cp == 0, "vd < 0: only outN");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
