// completion_detector: detects a complete valid word or a complete spacer.
//
// As in the paper's Fig. 6, each dual-rail signal gets a 2-input OR of its two
// rails (1 while the signal is valid, 0 while it is a spacer), and a tree of
// 2-input C-elements (c_tree) merges the OR outputs. ACKOUT therefore rises only
// after every input has become valid and falls only after every input has
// returned to the spacer; in between it holds. Its delay is one OR gate plus
// ceil(log2(W)) C-elements. W defaults to 65, the 2 x 32 operand bits plus the
// carry input of the paper's 32-bit adder (Fig. 6 shows W = 5 for 2 bits).
module completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned W = 65
) (
  input  dr_t [W-1:0] d,
  output logic        ackout
);

  logic [W-1:0] any_rail;  // OR1 .. ORW

  always_comb begin
    for (int i = 0; i < W; i++) any_rail[i] = d[i].r1 | d[i].r0;
  end

  c_tree #(.W(W)) u_tree (.in(any_rail), .out(ackout));

endmodule
