// rt_rca: N-bit relative-timed dual-rail ripple carry adder.
//
// N early output full adders are cascaded, the carry output of stage q driving
// the carry input of stage q+1 (paper, Fig. 7a, generalised from 2 to N bits;
// the paper evaluates N = 32). FA_KIND selects which of the two proposed full
// adders is used: FA_LOPT (latency optimized, the default here because the
// paper's cycle-time results single it out) or FA_AOPT (area optimized).
//
// Timing behaviour (paper, Table 1): with valid data the outputs appear after a
// delay proportional to the longest carry chain actually exercised (m stages);
// with spacer data every stage resets in parallel from its own A/B inputs, so
// the reverse latency is one full adder delay whatever N and m are. The cost is
// a relative-timing assumption that this RTL cannot express and that the cell
// placement must guarantee: the sum of stage q+1 must not reach the spacer
// before its carry input from stage q has, otherwise a late return-to-zero of
// the internal carry would go unacknowledged (an orphan).
//
// Interface: a, b are the dual-rail operands (bit 0 least significant), cin the
// incoming carry, sum and cout the dual-rail results. No clock, no handshake
// signals: the handshake is carried by the data itself (valid vs spacer).
module rt_rca
  import dr_pkg::*;
#(
  parameter int unsigned N       = 32,
  parameter fa_kind_e    FA_KIND = FA_LOPT
) (
  input  dr_t [N-1:0] a,
  input  dr_t [N-1:0] b,
  input  dr_t         cin,
  output dr_t [N-1:0] sum,
  output dr_t         cout
);

  dr_t [N:0] c;  // c[q] is the carry into stage q
  assign c[0] = cin;
  assign cout = c[N];

  for (genvar q = 0; q < N; q++) begin : g_stage
    if (FA_KIND == FA_AOPT) begin : g_aopt
      aopt_eo_fa u_fa (.a(a[q]), .b(b[q]), .cin(c[q]), .sum(sum[q]), .cout(c[q+1]));
    end else begin : g_lopt
      lopt_eo_fa u_fa (.a(a[q]), .b(b[q]), .cin(c[q]), .sum(sum[q]), .cout(c[q+1]));
    end
  end

  // The dual-rail code forbids both rails high on any input.
  always_comb begin
    for (int q = 0; q < N; q++) begin
      assert (!(a[q].r1 && a[q].r0)) else $error("rt_rca: illegal dual-rail code on a[%0d]", q);
      assert (!(b[q].r1 && b[q].r0)) else $error("rt_rca: illegal dual-rail code on b[%0d]", q);
    end
    assert (!(cin.r1 && cin.r0)) else $error("rt_rca: illegal dual-rail code on cin");
  end

endmodule
