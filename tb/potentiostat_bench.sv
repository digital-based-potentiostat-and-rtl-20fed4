// Test harness: the DB potentiostat wired to a Randles cell model, with a
// task that settles the loop at a given faradaic current and calibration,
// runs one acquisition window and returns the counts and the estimate.
// The output-stage unit currents are parameters so that a bench can model
// another operating point. Used by the workload testbench.
`timescale 1ns / 1ps
module potentiostat_bench
  import digota_pkg::*;
#(
  parameter real IP_UNIT = 8.1e-9,
  parameter real IN_UNIT = 8.1e-9
) (
  input logic tick,
  input logic clk,
  input logic rst_n
);

  localparam int unsigned NUM_W = CNT_W + CUR_W + 1;
  localparam real VREF = 0.2;

  real  vre, iout, i_f = 0.0, vib1, vib2;
  logic voutp_n, voutn, vcmp;
  dff_state_e state;
  logic start = 1'b0;
  logic [CAL_W-1:0] cal_p = 8'd1, cal_n = 8'd1;
  logic [CNT_W-1:0] window_len = '0, m_count, p_count, n_count;
  logic [CUR_W-1:0] ip_code = '0, in_code = '0;
  logic acq_busy, acq_done, if_busy, if_valid;
  logic signed [NUM_W-1:0] if_code;

  db_potentiostat #(.IP_UNIT(IP_UNIT), .IN_UNIT(IN_UNIT)) dut (
    .tick, .clk, .rst_n, .vref(VREF), .vre, .iout, .cal_p, .cal_n,
    .voutp_n, .voutn, .state, .vcmp, .vib1, .vib2, .start, .window_len,
    .ip_code, .in_code, .acq_busy, .acq_done, .m_count, .p_count, .n_count,
    .if_busy, .if_valid, .if_code
  );

  echem_cell_model #(.V0(VREF)) u_cell (.tick, .iout, .i_f, .vre);

  // One acquisition. code_ok tells whether if_code equals (p*ip - n*in)/M
  // computed here; est is the estimate in amperes.
  task automatic acquire(input real ifa, input int cp, input int cn,
                         input int m, input int settle,
                         output longint p, output longint n,
                         output real est, output bit code_ok, output bit len_ok);
    int cyc = 0;
    longint ipc, inc;
    i_f   = ifa;
    cal_p = CAL_W'(cp);
    cal_n = CAL_W'(cn);
    ipc   = longint'(IP_UNIT * 1.0e15 * cp + 0.5);   // fA
    inc   = longint'(IN_UNIT * 1.0e15 * cn + 0.5);
    ip_code = CUR_W'(ipc);
    in_code = CUR_W'(inc);
    repeat (settle) @(posedge clk);
    @(negedge clk);
    window_len = CNT_W'(m);
    start = 1'b1;
    @(posedge clk);
    #1;
    start = 1'b0;
    do begin
      @(posedge clk);
      #1;
      cyc++;
    end while (!acq_done && cyc < m + 10);
    len_ok = (cyc == m);
    while (!if_valid && cyc < m + NUM_W + 20) begin
      @(posedge clk);
      #1;
      cyc++;
    end
    p = longint'(p_count);
    n = longint'(n_count);
    code_ok = (longint'(if_code) == (p * ipc - n * inc) / m);
    est = (real'(p) * IP_UNIT * cp - real'(n) * IN_UNIT * cn) / m;
  endtask

endmodule
