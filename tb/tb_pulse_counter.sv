// Test of the acquisition counter: random pulse streams over random windows.
// Checks the window length in clock periods (done exactly M edges after the
// start edge), p and n against a count kept here, that start while busy is
// ignored, that window_len = 0 counts one period, and that results hold
// until the next window ends.
`timescale 1ns / 1ps
module tb_pulse_counter;
  import digota_pkg::*;

  localparam int unsigned W = CNT_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [W-1:0] window_len = '0;
  logic voutp_n = 1'b1, voutn = 1'b0;
  logic busy, done;
  logic [W-1:0] m_count, p_count, n_count;

  always #5 clk = ~clk;

  pulse_counter dut (.clk, .rst_n, .start, .window_len, .voutp_n, .voutn,
                     .busy, .done, .m_count, .p_count, .n_count);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic window(input int m, input int pp, input int pn, input bit poke);
    int p_ref = 0, n_ref = 0, edges = 0, m_eff;
    m_eff = (m == 0) ? 1 : m;
    @(negedge clk);
    window_len = W'(m);
    start = 1'b1;
    @(posedge clk);            // start edge
    #1;
    start = 1'b0;
    check(busy, "busy after start");
    do begin
      @(negedge clk);
      voutp_n = !(($urandom % 100) < pp);
      voutn   = (($urandom % 100) < pn);
      if (poke && edges == 1) begin start = 1'b1; window_len = W'(3); end
      else start = 1'b0;
      p_ref += int'(!voutp_n);
      n_ref += int'(voutn);
      @(posedge clk);
      #1;
      edges++;
    end while (!done && edges < m_eff + 5);
    start = 1'b0;
    check(edges == m_eff, $sformatf("window of %0d edges, expected %0d", edges, m_eff));
    check(int'(p_count) == p_ref, $sformatf("p=%0d expected %0d", p_count, p_ref));
    check(int'(n_count) == n_ref, $sformatf("n=%0d expected %0d", n_count, n_ref));
    check(int'(m_count) == m_eff, "m_count");
    check(!busy, "idle after done");
    // Results hold while idle.
    repeat (3) @(posedge clk);
    #1;
    check(int'(p_count) == p_ref && int'(n_count) == n_ref && !done, "results held");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    window(1, 50, 50, 0);
    window(0, 100, 100, 0);
    window(17, 30, 20, 1);
    window(977, 20, 10, 0);     // T/256 of a 5 s acquisition at 50 kHz
    for (int i = 0; i < 20; i++)
      window(1 + int'($urandom % 300), int'($urandom % 101), int'($urandom % 101), i[0]);
    window(4000, 100, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
