// c_tree: tree of 2-input C-elements reducing W signals to one.
//
// The output becomes 1 only after every input is 1 and 0 only after every
// input is 0; in between it holds. The tree is built level by level: at each
// level neighbouring signals are joined in pairs by a C-element and an odd
// signal left over at the top end is passed on unchanged to the next level.
// For W = 5 this gives exactly the paper's Fig. 6 arrangement: C1 and C2 join
// pairs of OR outputs, C3 joins C1 and C2, C4 joins C3 with the fifth signal.
// The paper decomposes wide C-elements into 2-input ones but does not give the
// shape for other widths; this pairing rule is this design's choice. The depth
// is ceil(log2(W)) C-elements. Each C-element holds state through its own
// feedback (see c_element), which tools report as combinational loops.
module c_tree #(
  parameter int unsigned W = 5
) (
  input  logic [W-1:0] in,
  output logic         out
);

  localparam int unsigned LEVELS = (W > 1) ? $clog2(W) : 0;

  // Number of signals present at level k (level 0 is the input).
  function automatic int unsigned width_at(input int unsigned k);
    int unsigned w = W;
    for (int unsigned i = 0; i < k; i++) w = (w + 1) / 2;
    return w;
  endfunction

  logic [W-1:0] node [LEVELS+1];

  assign node[0] = in;

  for (genvar k = 0; k < LEVELS; k++) begin : g_level
    localparam int unsigned WK = width_at(k);
    localparam int unsigned WN = width_at(k + 1);
    for (genvar j = 0; j < WK / 2; j++) begin : g_pair
      c_element u_c (.a(node[k][2*j]), .b(node[k][2*j+1]), .rst(1'b0), .z(node[k+1][j]));
    end
    if (WK % 2 == 1) begin : g_pass
      assign node[k+1][WN-1] = node[k][WK-1];
    end
    if (WN < W) begin : g_unused
      assign node[k+1][W-1:WN] = '0;
    end
  end

  assign out = node[LEVELS][0];

endmodule
