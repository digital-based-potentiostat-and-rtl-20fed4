// Digital-based (DB) potentiostat for chronoamperometry.
//
// The FI-DIGOTA is closed in a loop with a three-electrode cell: its + input
// is the reference voltage Vref, its - input the reference electrode RE, its
// output drives the counter electrode CE. The loop holds RE at Vref by
// injecting charge packets ip*Tclk (outP active) or removing in*Tclk (outN
// active), so the average output current equals the faradaic current of the
// working electrode and the two pulse streams are a direct digital reading
// of it. The pulse counter counts the active periods p and n over a window
// of M clock periods and the estimator forms i_f = (p*ip - n*in)/M.
//
// The cell itself is outside this module: vre comes in, iout goes out.
// Interface: tick = analog time step of the behavioural models (TSTEP s);
// clk = sampling clock (50 kHz in the paper); start opens a window of
// window_len periods; acq_done pulses when p_count/n_count are ready and the
// estimator takes the counts on the next edge; if_valid pulses W + CW + 2
// clocks after acq_done, with if_code in the unit of ip_code/in_code.
// Default parameters are the paper's Table II values at Vdd = 0.4 V with a
// unit output current Ion = 8.1 nA.
module db_potentiostat
  import digota_pkg::*;
#(
  parameter real VDD     = 0.4,
  parameter real GM      = 61.0e-9,
  parameter real RO      = 89.0e9,
  parameter real CFI     = 1.9e-15,
  parameter real ICM     = 0.8e-12,
  parameter real VTH     = 0.2,
  parameter real TSTEP   = 1.0e-6,
  parameter real IP_UNIT = 8.1e-9,
  parameter real IN_UNIT = 8.1e-9,
  parameter int unsigned W  = CNT_W,
  parameter int unsigned CW = CUR_W
) (
  input  logic                    tick,
  input  logic                    clk,
  input  logic                    rst_n,
  input  real                     vref,        // Vref, + input
  input  real                     vre,         // reference electrode, - input
  output real                     iout,        // into the counter electrode
  input  logic [CAL_W-1:0]        cal_p,
  input  logic [CAL_W-1:0]        cal_n,
  output logic                    voutp_n,     // outP stream
  output logic                    voutn,       // outN stream
  output dff_state_e              state,
  output logic                    vcmp,
  output real                     vib1,        // FI output nodes (observation)
  output real                     vib2,
  input  logic                    start,
  input  logic [W-1:0]            window_len,
  input  logic [CW-1:0]           ip_code,
  input  logic [CW-1:0]           in_code,
  output logic                    acq_busy,
  output logic                    acq_done,
  output logic [W-1:0]            m_count,
  output logic [W-1:0]            p_count,
  output logic [W-1:0]            n_count,
  output logic                    if_busy,
  output logic                    if_valid,
  output logic signed [W+CW:0]    if_code
);

  fi_digota #(
    .VDD(VDD), .GM(GM), .RO(RO), .CFI(CFI), .ICM(ICM), .VTH(VTH),
    .TSTEP(TSTEP), .IP_UNIT(IP_UNIT), .IN_UNIT(IN_UNIT)
  ) u_digota (
    .tick    (tick),
    .clk     (clk),
    .rst_n   (rst_n),
    .vinp    (vref),
    .vinn    (vre),
    .cal_p   (cal_p),
    .cal_n   (cal_n),
    .iout    (iout),
    .voutp_n (voutp_n),
    .voutn   (voutn),
    .state   (state),
    .vcmp    (vcmp),
    .vib1    (vib1),
    .vib2    (vib2)
  );

  pulse_counter #(.W(W)) u_counter (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .window_len (window_len),
    .voutp_n    (voutp_n),
    .voutn      (voutn),
    .busy       (acq_busy),
    .done       (acq_done),
    .m_count    (m_count),
    .p_count    (p_count),
    .n_count    (n_count)
  );

  faradaic_estimator #(.W(W), .CW(CW)) u_estimator (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (acq_done),
    .p_count (p_count),
    .n_count (n_count),
    .m_count (m_count),
    .ip_code (ip_code),
    .in_code (in_code),
    .busy    (if_busy),
    .valid   (if_valid),
    .if_code (if_code)
  );

endmodule
