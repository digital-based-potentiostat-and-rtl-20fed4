// Shared types and constants of the digital-based (DB) potentiostat.
//
// The FI-DIGOTA state is the pair (vq1, vq2) of its two sampling flip-flops.
// Its four values carry the meaning given to them by the amplifier's
// algorithm: equal values mean the sign of the input cannot be told yet and
// the common-mode compensator is active; (0,1) means a positive differential
// input (pull-up M5 on), (1,0) a negative one (pull-down M6 on).
// The 8-bit width of the output-stage calibration words follows the paper;
// the counter width is sized for its longest acquisition (5 s at 50 kHz,
// 250,000 clock periods, 18 bits). The current-code width is this design's
// choice.
package digota_pkg;

  localparam int unsigned CAL_W = 8;    // output-stage calibration word width
  localparam int unsigned CNT_W = 18;   // acquisition counters: 2^18 > 250,000
  localparam int unsigned CUR_W = 32;   // current code width (fA: up to 4.29 uA)

  // {vq1, vq2}
  typedef enum logic [1:0] {
    ST_BOTH_LOW  = 2'b00,  // CM compensator charges the FI outputs up
    ST_POSITIVE  = 2'b01,  // vd > 0: pMOS M5 sources ip
    ST_NEGATIVE  = 2'b10,  // vd < 0: nMOS M6 sinks in
    ST_BOTH_HIGH = 2'b11   // CM compensator discharges the FI outputs
  } dff_state_e;

  // Gate drives leaving the synchronous logic network.
  typedef struct packed {
    logic voutp_n;    // gate of pMOS M5: low = M5 on (ip sourced)
    logic voutn;      // gate of nMOS M6: high = M6 on (in sunk)
    logic mx_gate_n;  // gate of pMOS Mx: low = Vcmp pulled to Vdd
    logic my_gate;    // gate of nMOS My: high = Vcmp pulled to ground
  } drive_t;

endpackage
