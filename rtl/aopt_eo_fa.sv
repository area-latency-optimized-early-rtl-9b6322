// aopt_eo_fa: area optimized early output dual-rail full adder (AOPT_EO_FA).
//
// Gate for gate, this is the paper's Fig. 8. Six AO22 gates (Y = AB + CD):
//   CG1  int1  = A1.B1 + A0.B0          (operands equal: generate or kill)
//   CG2  int2  = A0.B1 + A1.B0          (operands differ: propagate)
//   CG3  nsum1 = int1.CIN1 + int2.CIN0
//   CG4  nsum0 = int1.CIN0 + int2.CIN1
//   CG5  COUT1 = int2.CIN1 + A1.B1
//   CG6  COUT0 = int2.CIN0 + A0.B0
// a 2-input OR gate ICD (internal completion detector) int3 = int1 + int2, and
// two C-elements SUM1 = C(nsum1, int3), SUM0 = C(nsum0, int3).
//
// Behaviour: the sum waits for all three inputs to be valid; the carry is
// produced early on generate (A1=B1=1) or kill (A0=B0=1) without waiting for
// CIN. In the return-to-zero phase a spacer on any one input pair resets int1,
// int2 and int3, so SUM and COUT return to the spacer without waiting for the
// other inputs (early reset). The adder has no clock; its timing is that of the
// gates. When cascaded, a stage's sum may reset before its carry input does,
// which is why the ripple carry adder built from it is relative-timed.
module aopt_eo_fa
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic int1, int2, int3, nsum1, nsum0;

  assign int1  = (a.r1 & b.r1) | (a.r0 & b.r0);     // CG1
  assign int2  = (a.r0 & b.r1) | (a.r1 & b.r0);     // CG2
  assign int3  = int1 | int2;                       // ICD
  assign nsum1 = (int1 & cin.r1) | (int2 & cin.r0); // CG3
  assign nsum0 = (int1 & cin.r0) | (int2 & cin.r1); // CG4
  assign cout.r1 = (int2 & cin.r1) | (a.r1 & b.r1); // CG5
  assign cout.r0 = (int2 & cin.r0) | (a.r0 & b.r0); // CG6

  c_element u_c1 (.a(nsum1), .b(int3), .rst(1'b0), .z(sum.r1));
  c_element u_c2 (.a(nsum0), .b(int3), .rst(1'b0), .z(sum.r0));

endmodule
