// c_element: 2-input Muller C-element with an active-high clear.
//
// The output rises only when both inputs are 1, falls only when both are 0, and
// otherwise keeps its value. As in the paper, it is written as an AO222 gate
// whose output is fed back to two of its inputs: Z = XY + (X+Y)Z. The clear
// input `rst` (forces Z to 0) is this design's addition: the paper does not
// discuss initialisation, but a register C-element whose inputs disagree at
// power-up would otherwise keep a random value. Inside the full adders and the
// completion detector it is tied to 0.
//
// The feedback Z -> Z is a combinational loop by construction; it is the
// state-holding node of the gate and is intentional. There is no clock; the
// output reacts to input changes after the gate's own propagation delay.
module c_element (
  input  logic a,    // X
  input  logic b,    // Y
  input  logic rst,  // clear to 0 (this design's addition)
  output logic z     // Z
);

  assign z = ~rst & ((a & b) | ((a | b) & z));

endmodule
