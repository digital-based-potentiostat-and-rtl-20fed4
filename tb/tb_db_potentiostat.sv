// End-to-end test of the DB potentiostat: FI-DIGOTA closed in a loop with a
// Randles cell model, pulse counting over an acquisition window and the
// Eq. (1) current estimate.
//
// For each case a faradaic current is applied, the loop is given time to
// settle, and one window of M clock periods is acquired. Checks:
//   - the window ends exactly M clock periods after start;
//   - p and n counted by the block match p and n counted here from the
//     streams over the same clock periods;
//   - if_code equals (p*ip - n*in)/M computed here, and arrives
//     NUM_W + 1 = W + CW + 2 clocks after acq_done;
//   - the estimate is within 2 % (+ 2 LSB) of the applied current;
//   - the net charge p*ip - n*in has the sign of i_f.
// Mechanisms counted (each must happen): self-oscillation (0,0)<->(1,1),
// outP pulses (ip on), outN pulses (in on), Vcmp holding through a mixed
// state, a change of output-stage calibration, completed windows and
// estimates.
`timescale 1ns / 1ps
module tb_db_potentiostat;
  import digota_pkg::*;

  localparam int unsigned W  = CNT_W;
  localparam int unsigned CW = CUR_W;
  localparam int unsigned NUM_W = W + CW + 1;
  localparam real TSTEP = 1.0e-6;
  localparam int TICKS_PER_CLK = 20;       // 50 kHz clock, 1 us ticks
  localparam real VREF = 0.2;

  logic tick = 1'b0, clk = 1'b0, rst_n = 1'b0;
  real  vre, iout, i_f, vib1, vib2;
  logic [CAL_W-1:0] cal_p, cal_n;
  logic voutp_n, voutn, vcmp;
  dff_state_e state;
  logic start;
  logic [W-1:0] window_len, m_count, p_count, n_count;
  logic [CW-1:0] ip_code, in_code;
  logic acq_busy, acq_done, if_busy, if_valid;
  logic signed [NUM_W-1:0] if_code;

  always #500 tick = ~tick;               // 1 us
  always #10000 clk = ~clk;               // 20 us

  db_potentiostat dut (
    .tick, .clk, .rst_n, .vref(VREF), .vre, .iout, .cal_p, .cal_n,
    .voutp_n, .voutn, .state, .vcmp, .vib1, .vib2, .start, .window_len,
    .ip_code, .in_code, .acq_busy, .acq_done, .m_count, .p_count, .n_count,
    .if_busy, .if_valid, .if_code
  );

  echem_cell_model #(.V0(VREF), .TSTEP(TSTEP)) u_cell (
    .tick, .iout, .i_f, .vre
  );

  int checks = 0, failures = 0;
  int n_selfosc = 0, n_ppulse = 0, n_npulse = 0, n_hold = 0;
  int n_calchange = 0, n_windows = 0, n_estimates = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Mechanism monitors.
  dff_state_e prev_state = ST_BOTH_LOW;
  logic prev_p = 1'b1, prev_n = 1'b0, prev_vcmp = 1'b1;
  always @(posedge clk) begin
    if (rst_n) begin
      if ((prev_state == ST_BOTH_LOW  && state == ST_BOTH_HIGH) ||
          (prev_state == ST_BOTH_HIGH && state == ST_BOTH_LOW))
        n_selfosc++;
      if (!voutp_n && prev_p) n_ppulse++;
      if (voutn && !prev_n) n_npulse++;
      if ((state == ST_POSITIVE || state == ST_NEGATIVE) && vcmp == prev_vcmp)
        n_hold++;
    end
    prev_state <= state;
    prev_p     <= voutp_n;
    prev_n     <= voutn;
    prev_vcmp  <= vcmp;
  end

  // Run one acquisition and check it.
  task automatic acquire(input real ifa, input int cp, input int cn,
                         input int m, input int settle);
    longint p_ref, n_ref, num, exp_code;
    real    ip, inn, est;
    int     cyc, lat;
    if (cp != int'(cal_p) || cn != int'(cal_n)) n_calchange++;
    i_f   = ifa;
    cal_p = CAL_W'(cp);
    cal_n = CAL_W'(cn);
    ip    = 8.1e-9 * cp;
    inn   = 8.1e-9 * cn;
    ip_code = CW'(longint'(8100000) * cp);   // fA
    in_code = CW'(longint'(8100000) * cn);
    repeat (settle) @(posedge clk);
    // Open the window: start is seen at the next edge.
    @(negedge clk);
    window_len = W'(m);
    start = 1'b1;
    @(posedge clk);
    #1;
    start = 1'b0;
    p_ref = 0; n_ref = 0; cyc = 0;
    // The M edges after the start edge are counted.
    do begin
      @(posedge clk);
      #1;
      cyc++;
    end while (!acq_done && cyc < m + 10);
    check(cyc == m, $sformatf("window length %0d, expected %0d", cyc, m));
    n_windows++;
    lat = 0;
    while (!if_valid && lat < NUM_W + 10) begin
      @(posedge clk);
      #1;
      lat++;
    end
    // The estimator takes the counts on the edge after acq_done.
    check(lat == NUM_W + 1,
          $sformatf("estimator latency %0d, expected %0d", lat, NUM_W + 1));
    n_estimates++;
    num = longint'(p_count) * longint'(ip_code) - longint'(n_count) * longint'(in_code);
    exp_code = num / longint'(m);
    check(longint'(if_code) == exp_code,
          $sformatf("if_code %0d, expected %0d", if_code, exp_code));
    est = (real'(p_count) * ip - real'(n_count) * inn) / real'(m);
    check((est - ifa < 0.02 * (ifa < 0 ? -ifa : ifa) + 2.0 * ip / m) &&
          (ifa - est < 0.02 * (ifa < 0 ? -ifa : ifa) + 2.0 * ip / m),
          $sformatf("estimate %g A for applied %g A", est, ifa));
    if (ifa > 0) check(num > 0, "net charge positive for positive current");
    if (ifa < 0) check(num < 0, "net charge negative for negative current");
    $display("i_f=%g A cal_p=%0d cal_n=%0d M=%0d: p=%0d n=%0d estimate=%g A code=%0d fA",
             ifa, cp, cn, m, p_count, n_count, est, if_code);
  endtask

  // Reference count of the streams while the window is open.
  longint p_mon = 0, n_mon = 0;
  always @(posedge clk) begin
    if (dut.u_counter.busy) begin
      p_mon <= p_mon + longint'(!voutp_n);
      n_mon <= n_mon + longint'(voutn);
    end else if (start) begin
      p_mon <= 0;
      n_mon <= 0;
    end
  end
  always @(posedge clk) begin
    if (acq_done) begin
      #1;
      check(longint'(p_count) == p_mon && longint'(n_count) == n_mon,
            $sformatf("counts p=%0d n=%0d, streams gave p=%0d n=%0d",
                      p_count, n_count, p_mon, n_mon));
    end
  end

  initial begin
    i_f = 0.0; cal_p = 8'd1; cal_n = 8'd1; start = 1'b0;
    window_len = '0; ip_code = '0; in_code = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    acquire( 0.0,     1, 1,  2000,  200);
    acquire( 2.0e-9,  1, 1,  8192, 2000);
    acquire(-3.0e-9,  1, 1,  8192, 2000);
    acquire( 40.0e-9, 8, 1,  8192, 2000);
    check(n_selfosc > 0,   "self-oscillation (0,0)<->(1,1) seen");
    check(n_ppulse > 0,    "outP pulses seen");
    check(n_npulse > 0,    "outN pulses seen");
    check(n_hold > 0,      "Vcmp held through a mixed state");
    check(n_calchange > 0, "calibration change made");
    check(n_windows == 4,  "all windows completed");
    check(n_estimates == 4, "all estimates made");
    $display("mechanisms: self-osc=%0d outP=%0d outN=%0d vcmp-hold=%0d cal-change=%0d windows=%0d estimates=%0d",
             n_selfosc, n_ppulse, n_npulse, n_hold, n_calchange, n_windows, n_estimates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
