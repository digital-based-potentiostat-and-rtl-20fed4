// Full-size run of the DB potentiostat with every parameter at its default:
// one complete chronoamperometric acquisition of 5 s at 50 kHz
// (M = 250,000 clock periods, the paper's acquisition), with a 5 nA faradaic
// current drawn from a Randles cell model (Rp = 220 MOhm, Cp = 7 nF).
// Checks the window length, the counts against the streams, the Eq. (1)
// estimate against a value computed here, the estimator latency, and the
// estimate against the applied current (0.2 % + 2 LSB).
`timescale 1ns / 1ps
module tb_db_potentiostat_full;
  import digota_pkg::*;

  localparam int unsigned NUM_W = CNT_W + CUR_W + 1;
  localparam int M = 250000;
  localparam real VREF = 0.2, IFA = 5.0e-9, IP = 8.1e-9;

  logic tick = 1'b0, clk = 1'b0, rst_n = 1'b0;
  real  vre, iout, i_f, vib1, vib2;
  logic voutp_n, voutn, vcmp;
  dff_state_e state;
  logic start = 1'b0;
  logic [CNT_W-1:0] window_len, m_count, p_count, n_count;
  logic acq_busy, acq_done, if_busy, if_valid;
  logic signed [NUM_W-1:0] if_code;

  always #500 tick = ~tick;               // 1 us model step
  always #10000 clk = ~clk;               // 50 kHz

  db_potentiostat dut (
    .tick, .clk, .rst_n, .vref(VREF), .vre, .iout, .cal_p(8'd1), .cal_n(8'd1),
    .voutp_n, .voutn, .state, .vcmp, .vib1, .vib2, .start, .window_len,
    .ip_code(CUR_W'(8100000)), .in_code(CUR_W'(8100000)),
    .acq_busy, .acq_done, .m_count, .p_count, .n_count,
    .if_busy, .if_valid, .if_code
  );

  echem_cell_model #(.V0(VREF)) u_cell (.tick, .iout, .i_f, .vre);

  int checks = 0, failures = 0;
  longint p_mon = 0, n_mon = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk)
    if (acq_busy) begin
      p_mon <= p_mon + longint'(!voutp_n);
      n_mon <= n_mon + longint'(voutn);
    end

  initial begin
    int cyc = 0, lat = 0;
    longint exp_code;
    real est;
    i_f = IFA;
    window_len = CNT_W'(M);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2000) @(posedge clk);        // settling, 40 ms
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    #1;
    start = 1'b0;
    do begin
      @(posedge clk);
      #1;
      cyc++;
    end while (!acq_done && cyc < M + 10);
    check(cyc == M, $sformatf("window of %0d periods, expected %0d", cyc, M));
    check(longint'(p_count) == p_mon && longint'(n_count) == n_mon, "counts match the streams");
    while (!if_valid && lat < NUM_W + 10) begin
      @(posedge clk);
      #1;
      lat++;
    end
    check(lat == NUM_W + 1, $sformatf("estimator latency %0d", lat));
    exp_code = (longint'(p_count) - longint'(n_count)) * 8100000 / M;
    check(longint'(if_code) == exp_code, $sformatf("if_code %0d, expected %0d", if_code, exp_code));
    est = (real'(p_count) - real'(n_count)) * IP / M;
    check(est > IFA * 0.998 - 2.0 * IP / M && est < IFA * 1.002 + 2.0 * IP / M,
          $sformatf("estimate %g A for %g A", est, IFA));
    $display("5 s acquisition: p=%0d n=%0d if_code=%0d fA (applied %0d fA)",
             p_count, n_count, if_code, longint'(IFA * 1.0e15));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (M + 5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
