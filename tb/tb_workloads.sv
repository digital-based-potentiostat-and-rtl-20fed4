// Workloads of the paper's measurements, run on the closed loop
// (DB potentiostat + Randles cell model). Each case applies a faradaic
// current, lets the loop settle and runs one acquisition window; the
// estimate must be within 2 % + 3 LSB of the applied current (one LSB is
// ip/M), the window must last M periods and the estimator code must equal
// Eq. (1) computed here.
//   Bench A, unit output current 8.1 nA (Ion of Table II, Vdd = 0.4 V):
//     - the multi-die resistive-load means of Table III
//       (1.18, 5.68, 10.79, 50.77, 100.99, 502.28 nA) with 20 ms windows;
//     - the ends of the ferrocyanide range, 600 pA and 650 nA;
//     - one 5 s window (M = 250,000) at 10.79 nA.
//   Bench B, ip = 4.89 nA and in = 10.16 nA (the glucose measurements):
//     - currents across the 2.4 - 4.4 nA span of the glucose calibration
//       plot, each with a 20 ms (T/256, M = 977) window and with 5 s windows
//       for the two ends.
// The calibration word of the pull-up is chosen per current, as the paper
// does, so that cal_p * unit current exceeds the current to be read.
`timescale 1ns / 1ps
module tb_workloads;

  logic tick = 1'b0, clk = 1'b0, rst_n = 1'b0;
  always #500 tick = ~tick;
  always #10000 clk = ~clk;

  potentiostat_bench #(.IP_UNIT(8.1e-9),  .IN_UNIT(8.1e-9))   a (.tick, .clk, .rst_n);
  potentiostat_bench #(.IP_UNIT(4.89e-9), .IN_UNIT(10.16e-9)) b (.tick, .clk, .rst_n);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic judge(input string name, input real ifa, input real ip, input int m,
                       input longint p, input longint n, input real est,
                       input bit code_ok, input bit len_ok);
    real tol;
    tol = 0.02 * ifa + 3.0 * ip / m;
    check(len_ok, {name, ": window length"});
    check(code_ok, {name, ": estimator code"});
    check(est - ifa < tol && ifa - est < tol,
          $sformatf("%s: estimate %g A for %g A", name, est, ifa));
    $display("%-22s i_f=%9.3f nA  M=%6d  p=%6d n=%6d  estimate=%9.3f nA  error=%6.2f %%",
             name, ifa * 1e9, m, p, n, est * 1e9, 100.0 * (est - ifa) / ifa);
  endtask

  initial begin
    longint p, n;
    real est;
    bit code_ok, len_ok;
    real tab3 [6] = '{1.18e-9, 5.68e-9, 10.79e-9, 50.77e-9, 100.99e-9, 502.28e-9};
    int  calp [6] = '{1, 1, 2, 8, 16, 80};
    real gluc [5] = '{2.4e-9, 2.9e-9, 3.4e-9, 3.9e-9, 4.4e-9};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int i = 0; i < 6; i++) begin
          a.acquire(tab3[i], calp[i], 1, 977, 500, p, n, est, code_ok, len_ok);
          judge($sformatf("Table III #%0d", i), tab3[i], 8.1e-9 * calp[i], 977,
                p, n, est, code_ok, len_ok);
        end
        a.acquire(0.6e-9, 1, 1, 977, 500, p, n, est, code_ok, len_ok);
        judge("ferrocyanide 600 pA", 0.6e-9, 8.1e-9, 977, p, n, est, code_ok, len_ok);
        a.acquire(650.0e-9, 100, 1, 977, 500, p, n, est, code_ok, len_ok);
        judge("ferrocyanide 650 nA", 650.0e-9, 810.0e-9, 977, p, n, est, code_ok, len_ok);
        a.acquire(10.79e-9, 2, 1, 250000, 500, p, n, est, code_ok, len_ok);
        judge("Table III #2, 5 s", 10.79e-9, 16.2e-9, 250000, p, n, est, code_ok, len_ok);
      end
      begin
        for (int i = 0; i < 5; i++) begin
          b.acquire(gluc[i], 1, 1, 977, 500, p, n, est, code_ok, len_ok);
          judge($sformatf("glucose %0d, 20 ms", i), gluc[i], 4.89e-9, 977,
                p, n, est, code_ok, len_ok);
        end
        b.acquire(gluc[0], 1, 1, 250000, 500, p, n, est, code_ok, len_ok);
        judge("glucose 0, 5 s", gluc[0], 4.89e-9, 250000, p, n, est, code_ok, len_ok);
        b.acquire(gluc[4], 1, 1, 250000, 500, p, n, est, code_ok, len_ok);
        judge("glucose 4, 5 s", gluc[4], 4.89e-9, 250000, p, n, est, code_ok, len_ok);
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (700000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
