// FI-DIGOTA: the floating-inverter digital operational transconductance
// amplifier at the heart of the DB potentiostat.
//
// It is the chain of Fig. 2(a) of the paper: the FI input stage with its
// threshold buffers (behavioural model), biased by the CM compensation
// network (behavioural model), turns the differential input vinp - vinn into
// a time difference between the buffer outputs vd1 and vd2; the synchronous
// logic network samples them on clk and decodes the state; the trimmable
// output stage (behavioural model) then sources ip while voutP is active or
// sinks in while voutN is active.
// Without input the amplifier self-oscillates between (0,0) and (1,1) and
// the output stays high-impedance. The drive signals voutp_n/voutn are the
// chip's digital output streams outP/outN.
//
// Interface: tick is the time step of the analog models (TSTEP seconds per
// rising edge) and must be a whole fraction of the clk period; clk is the
// 50 kHz sampling clock of the paper. Outputs change after rising clk edges;
// iout follows the drives combinationally.
module fi_digota
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
  parameter real IN_UNIT = 8.1e-9
) (
  input  logic             tick,
  input  logic             clk,
  input  logic             rst_n,
  input  real              vinp,      // + input (Vref)
  input  real              vinn,      // - input (reference electrode)
  input  logic [CAL_W-1:0] cal_p,
  input  logic [CAL_W-1:0] cal_n,
  output real              iout,      // OUT current (to counter electrode)
  output logic             voutp_n,   // outP stream, low = ip on
  output logic             voutn,     // outN stream, high = in on
  output dff_state_e       state,     // {vq1, vq2}
  output logic             vcmp,      // CM compensator control node
  output real              vib1,      // FI output nodes, for observation
  output real              vib2
);

  logic   vd1, vd2;
  drive_t drive;

  real i_cm;

  fi_input_stage_model #(
    .VDD(VDD), .GM(GM), .RO(RO), .CFI(CFI), .VTH(VTH), .TSTEP(TSTEP)
  ) u_input (
    .tick (tick),
    .vinp (vinp),
    .vinn (vinn),
    .i_cm (i_cm),
    .vd1  (vd1),
    .vd2  (vd2),
    .vib1 (vib1),
    .vib2 (vib2)
  );

  cm_compensator_model #(.ICM(ICM)) u_cm (
    .tick      (tick),
    .mx_gate_n (drive.mx_gate_n),
    .my_gate   (drive.my_gate),
    .vcmp      (vcmp),
    .i_cm      (i_cm)
  );

  sync_logic_network u_logic (
    .clk   (clk),
    .rst_n (rst_n),
    .vd1   (vd1),
    .vd2   (vd2),
    .state (state),
    .drive (drive)
  );

  output_stage_model #(.IP_UNIT(IP_UNIT), .IN_UNIT(IN_UNIT)) u_out (
    .voutp_n (drive.voutp_n),
    .voutn   (drive.voutn),
    .cal_p   (cal_p),
    .cal_n   (cal_n),
    .iout    (iout)
  );

  assign voutp_n = drive.voutp_n;
  assign voutn   = drive.voutn;

endmodule
