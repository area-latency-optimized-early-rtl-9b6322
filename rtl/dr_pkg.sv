// dr_pkg: shared types for the dual-rail, four-phase return-to-zero adder.
//
// A logical bit D travels on two wires, D1 and D0. D=1 is sent as (D1,D0)=(1,0),
// D=0 as (0,1), and (0,0) is the spacer that separates two data words. (1,1) is
// illegal. This encoding and the valid/spacer/valid/spacer sequence follow the
// paper; the struct layout and the helper functions are this design's own.
package dr_pkg;

  // One dual-rail bit: r1 is the "true" rail, r0 the "false" rail.
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  localparam dr_t DR_SPACER = '{r1: 1'b0, r0: 1'b0};

  // Which of the two proposed early output full adders an adder is built from.
  typedef enum logic {
    FA_AOPT = 1'b0,  // area optimized  (6 AO22, 2 C-elements, 1 OR)
    FA_LOPT = 1'b1   // latency optimized (3 AO22, 2 AO21, 2 C-elements, 4 simple gates)
  } fa_kind_e;

  // Encode a binary value as valid dual-rail data.
  function automatic dr_t dr_encode(input logic b);
    return '{r1: b, r0: ~b};
  endfunction

  function automatic logic dr_is_valid(input dr_t d);
    return d.r1 ^ d.r0;
  endfunction

  function automatic logic dr_is_spacer(input dr_t d);
    return ~(d.r1 | d.r0);
  endfunction

endpackage
