// Test of the synchronous logic network: DFF1/DFF2 sampling and the decoding
// of (vq1, vq2) into the drives of M5, M6, Mx and My.
// Random buffer values are applied between clock edges; after each edge the
// state must equal the values applied before it, and every drive must match
// the table written out below from the state meanings: (0,1) pull-up on,
// (1,0) pull-down on, (0,0) Mx on, (1,1) My on. Reset must clear to (0,0).
`timescale 1ns / 1ps
module tb_sync_logic_network;
  import digota_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic vd1 = 1'b0, vd2 = 1'b0;
  dff_state_e state;
  drive_t drive;

  always #5 clk = ~clk;

  sync_logic_network dut (.clk, .rst_n, .vd1, .vd2, .state, .drive);

  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic check_drive(input logic q1, input logic q2);
    drive_t exp;
    case ({q1, q2})
      2'b00: exp = '{voutp_n: 1'b1, voutn: 1'b0, mx_gate_n: 1'b0, my_gate: 1'b0};
      2'b01: exp = '{voutp_n: 1'b0, voutn: 1'b0, mx_gate_n: 1'b1, my_gate: 1'b0};
      2'b10: exp = '{voutp_n: 1'b1, voutn: 1'b1, mx_gate_n: 1'b1, my_gate: 1'b0};
      default: exp = '{voutp_n: 1'b1, voutn: 1'b0, mx_gate_n: 1'b1, my_gate: 1'b1};
    endcase
    check(drive == exp, $sformatf("state %b%b: drive %b, expected %b", q1, q2, drive, exp));
  endtask

  initial begin
    logic a, b;
    vd1 = 1'b1; vd2 = 1'b1;
    repeat (2) @(posedge clk);
    #1;
    check(state == ST_BOTH_LOW, "reset clears the flops to (0,0)");
    check_drive(1'b0, 1'b0);
    @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      a = 1'($urandom); b = 1'($urandom);
      vd1 = a; vd2 = b;
      @(posedge clk);
      #1;
      check(state == dff_state_e'({a, b}), $sformatf("sampled %b, expected %b%b", state, a, b));
      check_drive(a, b);
      seen[{a, b}]++;
    end
    // Inputs changing between edges must not reach the outputs.
    @(negedge clk);
    vd1 = 1'b0; vd2 = 1'b1;
    @(posedge clk); #1;
    vd1 = 1'b1; vd2 = 1'b0;
    #3;
    check(state == ST_POSITIVE, "outputs change only on clock edges");
    foreach (seen[k]) check(seen[k] > 0, $sformatf("state %0d exercised", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
