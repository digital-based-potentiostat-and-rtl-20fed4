// Behavioural model (not synthesizable logic) of the common-mode (CM)
// compensation network of the FI-DIGOTA: Mx, My, M7-M10 and the capacitors
// Ca and Cb.
//
// How it works. The control node Vcmp is pulled to Vdd by pMOS Mx while
// mx_gate_n is low (state (0,0)) and to ground by nMOS My while my_gate is
// high (state (1,1)). When neither conducts, in the mixed states (0,1) and
// (1,0), nothing drives the node and it keeps its value. With Vcmp high, Cb,
// precharged to Vdd by M7, feeds the positive supply of the input stage
// through M8 and Ca is precharged to ground by M10: the stage's output nodes
// are charged. With Vcmp low, Ca feeds the negative supply through M9 while M7
// recharges Cb: the nodes are discharged. The model reduces this dynamic
// bias to the common-mode current i_cm = +ICM or -ICM injected into each FI
// output node, the Icm of the paper's linearised model (Table II: 0.8 pA at
// Vdd = 0.4 V).
// Follows the paper: the device roles and which capacitor acts in which
// state. Own choices: constant current (Ca and Cb sizes are not given, so no
// charge sharing), a floating Vcmp that holds perfectly, and Vcmp starting
// high.
// Timing: vcmp and i_cm follow the gates at once; the held value is stored
// on each rising edge of tick.
module cm_compensator_model #(
  parameter real ICM = 0.8e-12     // common-mode current [A]
) (
  input  logic tick,        // model time step
  input  logic mx_gate_n,   // gate of Mx, low = Vcmp to Vdd
  input  logic my_gate,     // gate of My, high = Vcmp to ground
  output logic vcmp,        // control node of M7-M10
  output real  i_cm         // current into each FI output node [A]
);

  logic held;
  initial held = 1'b1;

  always_comb begin
    vcmp = held;
    if (!mx_gate_n)   vcmp = 1'b1;
    else if (my_gate) vcmp = 1'b0;
  end

  always @(posedge tick) held <= vcmp;

  assign i_cm = vcmp ? ICM : -ICM;

endmodule
