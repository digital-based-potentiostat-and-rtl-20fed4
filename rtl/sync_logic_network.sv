// Synchronous logic network of the FI-DIGOTA (flip-flops DFF1/DFF2 and the
// four gates that follow them).
//
// DFF1 and DFF2 oversample the two buffer outputs vd1 and vd2 on every rising
// clock edge, so the time difference between their transitions, which carries
// the differential input, is quantised to a whole number of clock periods.
// The sampled pair (vq1, vq2) is decoded combinationally:
//   (0,1) -> voutp_n low : pMOS M5 on, ip sourced into the load (vd > 0)
//   (1,0) -> voutn  high : nMOS M6 on, in sunk from the load   (vd < 0)
//   (0,0) -> mx_gate_n low: Mx pulls Vcmp to Vdd (charge-up phase)
//   (1,1) -> my_gate high : My pulls Vcmp to ground (discharge phase)
// In (0,1) and (1,0) neither Mx nor My conducts and Vcmp keeps its value.
// This decoding follows the state meanings stated in the paper; the gate
// equations below are derived from them (the printed inputs of the gates in
// the schematic, vq1 with the complement of vq2 for voutP, the complement of
// vq1 with vq2 for voutN and vq1 with vq2 for Mx and My, agree with them).
//
// Timing: outputs change only after a rising edge of clk, one flop delay
// after the buffers switch. The asynchronous active-low reset, which clears
// both flops to (0,0), is this design's addition; the paper mentions none.
module sync_logic_network
  import digota_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       vd1,        // buffer output of FI node vib1
  input  logic       vd2,        // buffer output of FI node vib2
  output dff_state_e state,      // {vq1, vq2}
  output drive_t     drive       // gate drives of M5, M6, Mx, My
);

  logic vq1, vq2;   // DFF1, DFF2

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vq1 <= 1'b0;
      vq2 <= 1'b0;
    end else begin
      vq1 <= vd1;
      vq2 <= vd2;
    end
  end

  assign state = dff_state_e'({vq1, vq2});

  always_comb begin
    drive.voutp_n   = vq1 | ~vq2;   // low only in (0,1)
    drive.voutn     = vq1 & ~vq2;   // high only in (1,0)
    drive.mx_gate_n = vq1 | vq2;    // low only in (0,0)
    drive.my_gate   = vq1 & vq2;    // high only in (1,1)
  end

  // The pull-up and pull-down of the output stage are never on together,
  // nor are Mx and My.
  a_out_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(!drive.voutp_n && drive.voutn));
  a_cm_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(!drive.mx_gate_n && drive.my_gate));

endmodule
