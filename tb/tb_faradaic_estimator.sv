// Test of the Eq. (1) estimator: random counts, windows and current codes.
// The expected result (p*ip - n*in)/M, truncated toward zero, is computed
// here with 64-bit arithmetic; valid must come NUM_W clock edges after the
// start edge and start while busy must be ignored.
`timescale 1ns / 1ps
module tb_faradaic_estimator;
  import digota_pkg::*;

  localparam int unsigned W  = CNT_W;
  localparam int unsigned CW = CUR_W;
  localparam int unsigned NUM_W = W + CW + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0] p_count, n_count, m_count;
  logic [CW-1:0] ip_code, in_code;
  logic busy, valid;
  logic signed [NUM_W-1:0] if_code;

  always #5 clk = ~clk;

  faradaic_estimator dut (.clk, .rst_n, .start, .p_count, .n_count, .m_count,
                          .ip_code, .in_code, .busy, .valid, .if_code);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input longint m, input longint p, input longint n,
                     input longint ip, input longint inn);
    longint exp;
    int lat = 0;
    @(negedge clk);
    m_count = W'(m); p_count = W'(p); n_count = W'(n);
    ip_code = CW'(ip); in_code = CW'(inn);
    start = 1'b1;
    @(posedge clk);
    #1;
    start = 1'b0;
    exp = (p * ip - n * inn) / m;
    do begin
      @(negedge clk);
      // Poke start and the inputs mid-run: both must be ignored.
      if (lat == 3) begin
        start = 1'b1; p_count = '0; n_count = '1; m_count = W'(1);
      end else start = 1'b0;
      @(posedge clk);
      #1;
      lat++;
    end while (!valid && lat < NUM_W + 5);
    start = 1'b0;
    check(lat == NUM_W, $sformatf("latency %0d, expected %0d", lat, NUM_W));
    check(longint'(if_code) == exp,
          $sformatf("p=%0d n=%0d m=%0d ip=%0d in=%0d: %0d, expected %0d",
                    p, n, m, ip, inn, if_code, exp));
    repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Paper's operating point: Vdd = 0.3 V, ip = 4.89 nA, in = 10.16 nA (fA codes).
    run(250000, 60000, 10000, 4890000, 10160000);
    run(977, 200, 900, 4890000, 10160000);
    run(1, 1, 0, 1, 1);
    run(1, 0, 1, 1, 1);
    run(250000, 250000, 0, 64'd2591000000, 0);   // full scale: 255 * 10.16 nA
    run(7, 5, 2, 3, 4);                       // exact zero
    for (int i = 0; i < 60; i++) begin
      longint m, p, n;
      m = 1 + longint'($urandom % 250000);
      p = longint'($urandom) % (m + 1);
      n = longint'($urandom) % (m + 1 - p);
      run(m, p, n, longint'({32'd0, $urandom}), longint'({32'd0, $urandom}));
    end
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
