// lopt_eo_fa: latency optimized early output dual-rail full adder (LOPT_EO_FA).
//
// Gate for gate, this is the paper's Fig. 9:
//   AND  m1    = A1.B1                  (generate)
//   AND  m2    = A0.B0                  (kill)
//   OR   int1  = m1 + m2
//   CG1  int2  = A0.B1 + A1.B0          (AO22, propagate)
//   ICD  int3  = int1 + int2            (OR, internal completion detector)
//   CG2  nsum1 = int1.CIN1 + int2.CIN0  (AO22)
//   CG3  nsum0 = int1.CIN0 + int2.CIN1  (AO22)
//   CG4  COUT1 = int2.CIN1 + m1         (AO21, S = PQ + R)
//   CG5  COUT0 = int2.CIN0 + m2         (AO21)
//   C1   SUM1  = C(nsum1, int3),  C2  SUM0 = C(nsum0, int3)
//
// It computes the same function as aopt_eo_fa. The difference is that the carry
// path from CIN to COUT passes one AO21 gate instead of an AO22 gate, which is
// what makes it faster in a ripple carry chain; the price is three more simple
// gates. Sum waits for all inputs; carry is early on generate/kill; any one
// input pair returning to spacer resets both outputs (early reset).
module lopt_eo_fa
  import dr_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic m1, m2, int1, int2, int3, nsum1, nsum0;

  assign m1    = a.r1 & b.r1;
  assign m2    = a.r0 & b.r0;
  assign int1  = m1 | m2;
  assign int2  = (a.r0 & b.r1) | (a.r1 & b.r0);     // CG1
  assign int3  = int1 | int2;                       // ICD
  assign nsum1 = (int1 & cin.r1) | (int2 & cin.r0); // CG2
  assign nsum0 = (int1 & cin.r0) | (int2 & cin.r1); // CG3
  assign cout.r1 = (int2 & cin.r1) | m1;            // CG4
  assign cout.r0 = (int2 & cin.r0) | m2;            // CG5

  c_element u_c1 (.a(nsum1), .b(int3), .rst(1'b0), .z(sum.r1));
  c_element u_c2 (.a(nsum0), .b(int3), .rst(1'b0), .z(sum.r0));

endmodule
