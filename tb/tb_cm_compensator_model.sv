// Test of the CM compensation network model on its own, with the Mx/My gates
// driven by hand in place of the logic network.
// Checks:
//   - Vcmp starts high and the injected current is then +Icm;
//   - Mx on (mx_gate_n low) forces Vcmp high, My on (my_gate high) forces it
//     low, at once;
//   - with both off Vcmp holds its last value for any length of time, and
//     i_cm follows Vcmp (+Icm charging, -Icm discharging);
//   - a random sequence of the three legal gate patterns matches a reference
//     keeper written here.
`timescale 1ns / 1ps
module tb_cm_compensator_model;

  localparam real ICM = 0.8e-12;

  logic tick = 1'b0;
  logic mx_gate_n = 1'b1, my_gate = 1'b0;
  logic vcmp;
  real  i_cm;

  always #500 tick = ~tick;

  cm_compensator_model dut (.tick, .mx_gate_n, .my_gate, .vcmp, .i_cm);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic check_out(input logic exp, input string what);
    check(vcmp === exp, $sformatf("%s: vcmp=%b expected %b", what, vcmp, exp));
    check(i_cm == (exp ? ICM : -ICM), $sformatf("%s: i_cm=%g", what, i_cm));
  endtask

  initial begin
    logic ref_v;
    int   pick;
    #1;
    check_out(1'b1, "initial");
    // My pulls low at once, before any tick edge.
    @(negedge tick);
    my_gate = 1'b1;
    #1;
    check_out(1'b0, "My on");
    // Release: holds low over many ticks.
    @(negedge tick);
    my_gate = 1'b0;
    repeat (50) begin
      @(posedge tick);
      #1;
      check_out(1'b0, "floating after My");
    end
    // Mx pulls high, then hold high.
    @(negedge tick);
    mx_gate_n = 1'b0;
    #1;
    check_out(1'b1, "Mx on");
    @(negedge tick);
    mx_gate_n = 1'b1;
    repeat (50) begin
      @(posedge tick);
      #1;
      check_out(1'b1, "floating after Mx");
    end
    // Random sequence: (mx_gate_n,my_gate) = (0,0) set, (1,1) reset,
    // (1,0) hold. (0,1) would short the node and never occurs.
    ref_v = 1'b1;
    repeat (500) begin
      @(negedge tick);
      pick = $urandom_range(2);
      case (pick)
        0: begin mx_gate_n = 1'b0; my_gate = 1'b0; ref_v = 1'b1; end
        1: begin mx_gate_n = 1'b1; my_gate = 1'b1; ref_v = 1'b0; end
        default: begin mx_gate_n = 1'b1; my_gate = 1'b0; end
      endcase
      #1;
      check_out(ref_v, "random sequence");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge tick);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
