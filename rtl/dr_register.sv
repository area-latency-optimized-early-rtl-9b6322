// dr_register: dual-rail four-phase return-to-zero pipeline register.
//
// Each rail passes through its own 2-input C-element whose other input is the
// register's ACKIN (paper, Fig. 6: IA0/ACKIN -> A0, IA1/ACKIN -> A1). While
// ACKIN = 1 (the following stage has acknowledged the previous spacer) the
// register lets valid data through and holds it; while ACKIN = 0 (the following
// stage has acknowledged the data) it lets the spacer through and holds it.
// ACKIN is the inverted ACKOUT of the following stage's completion detector;
// the inversion is done by the instantiating module.
//
// rst (active high, asynchronous) clears every rail to the spacer. The paper
// does not discuss initialisation; this is this design's addition.
module dr_register
  import dr_pkg::*;
#(
  parameter int unsigned W = 65
) (
  input  logic        rst,
  input  logic        ackin,
  input  dr_t [W-1:0] d,
  output dr_t [W-1:0] q
);

  for (genvar i = 0; i < W; i++) begin : g_bit
    c_element u_c1 (.a(d[i].r1), .b(ackin), .rst(rst), .z(q[i].r1));
    c_element u_c0 (.a(d[i].r0), .b(ackin), .rst(rst), .z(q[i].r0));
  end

endmodule
