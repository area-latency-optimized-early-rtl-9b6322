// tb_rt_rca: self-checking test of the 32-bit relative-timed ripple carry adder,
// built once from each proposed full adder (AOPT and LOPT) and driven with the
// same stimulus.
//
// Per random operand pair (plus directed carry chains of every length), against
// binary arithmetic and a rail-level model of which outputs may be valid:
//  * valid A, B with the carry input still a spacer: exactly the sums and the
//    carry out that lie above the first generate/kill stage are valid; the
//    m stages of the carry chain that depends on cin stay spacers. This is the
//    data-dependent forward latency: m is counted and binned as 1-4, 5-8, 9-16
//    and 17-32 stages (the chain lengths the paper's cycle-time table uses);
//  * then cin valid: the full sum and carry out are right;
//  * early reset: a random subset of stages gets a spacer on A or B only; the
//    sums of exactly those stages become spacers and every other sum holds;
//  * parallel reset: with every internal carry forced valid, spacers on all
//    A and B still reset every sum. A stage's reset does not wait for the
//    carry from below, so the reverse latency is one full adder whatever the
//    carry chain (this is what makes the relative-timing assumption necessary).
module tb_rt_rca;
  import dr_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned VECTORS = 1200;

  dr_t [N-1:0] a, b, sum_ao, sum_lo;
  dr_t cin, cout_ao, cout_lo;
  int checks = 0, failures = 0;
  int chain_bin [4];

  rt_rca #(.N(N), .FA_KIND(FA_AOPT)) u_aopt (.a(a), .b(b), .cin(cin), .sum(sum_ao), .cout(cout_ao));
  rt_rca #(.N(N), .FA_KIND(FA_LOPT)) u_lopt (.a(a), .b(b), .cin(cin), .sum(sum_lo), .cout(cout_lo));

  function automatic dr_t [N-1:0] enc(input logic [N-1:0] x);
    dr_t [N-1:0] r;
    for (int i = 0; i < N; i++) r[i] = dr_encode(x[i]);
    return r;
  endfunction

  task automatic check_both(input string what, input dr_t [N-1:0] es, input dr_t ec);
    checks++;
    if (sum_ao !== es || cout_ao !== ec) begin
      failures++;
      $display("FAIL AOPT %s: sum %h cout %b%b exp %h %b%b", what, sum_ao, cout_ao.r1, cout_ao.r0, es, ec.r1, ec.r0);
    end
    checks++;
    if (sum_lo !== es || cout_lo !== ec) begin
      failures++;
      $display("FAIL LOPT %s: sum %h cout %b%b exp %h %b%b", what, sum_lo, cout_lo.r1, cout_lo.r0, es, ec.r1, ec.r0);
    end
  endtask

  task automatic one_vector(input logic [N-1:0] va, input logic [N-1:0] vb, input logic vc);
    logic [N:0] s;
    dr_t [N-1:0] es;
    dr_t ec;
    logic known;  // carry into the current stage is determined without cin
    int m;
    s = {1'b0, va} + {1'b0, vb} + (N+1)'(vc);
    // all spacer
    a = '0; b = '0; cin = DR_SPACER; #1;
    check_both("spacer", '0, DR_SPACER);
    // operands valid, cin spacer
    a = enc(va); b = enc(vb); #1;
    known = 1'b0; m = 0;
    for (int q = 0; q < N; q++) begin
      es[q] = known ? dr_encode(s[q]) : DR_SPACER;
      if (va[q] == vb[q]) known = 1'b1;
      if (!known) m++;
    end
    ec = known ? dr_encode(s[N]) : DR_SPACER;
    check_both("early carry, cin spacer", es, ec);
    // m + 1 stages ripple from cin; bin it
    if (m + 1 <= 4) chain_bin[0]++;
    else if (m + 1 <= 8) chain_bin[1]++;
    else if (m + 1 <= 16) chain_bin[2]++;
    else chain_bin[3]++;
    cin = dr_encode(vc); #1;
    check_both("valid", enc(s[N-1:0]), dr_encode(s[N]));
    // early reset of a random subset of stages through A or B only
    begin
      logic [N-1:0] sel, via_b;
      dr_t [N-1:0] ea;
      sel = $urandom; via_b = $urandom;
      if (sel == '0) sel[0] = 1'b1;
      ea = enc(s[N-1:0]);
      for (int q = 0; q < N; q++) begin
        if (sel[q]) begin
          if (via_b[q]) b[q] = DR_SPACER; else a[q] = DR_SPACER;
          ea[q] = DR_SPACER;
        end
      end
      #1;
      checks += 2;
      if (sum_ao !== ea) begin failures++; $display("FAIL AOPT early reset %h exp %h", sum_ao, ea); end
      if (sum_lo !== ea) begin failures++; $display("FAIL LOPT early reset %h exp %h", sum_lo, ea); end
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] va, vb;
    // directed: carry chain of every length L from cin (1 << L - 1 + 1 style)
    for (int l = 0; l <= N; l++) begin
      va = (l == 0) ? '0 : ({N{1'b1}} >> (N - l));  // propagate in stages 0..l-1
      vb = '0;
      one_vector(va, vb, 1'b1);
      one_vector(va, ~va & {N{1'b1}}, 1'b0);
    end
    for (int i = 0; i < VECTORS; i++) begin
      va = $urandom; vb = $urandom;
      one_vector(va, vb, 1'($urandom));
    end
    // parallel reset with internal carries held valid
    for (int i = 0; i < 50; i++) begin
      va = $urandom; vb = $urandom;
      a = enc(va); b = enc(vb); cin = dr_encode(1'b1); #1;
      force u_aopt.c = {(N+1){dr_encode(1'b1)}};
      force u_lopt.c = {(N+1){dr_encode(1'b0)}};
      a = '0; b = '0; #1;
      checks += 2;
      if (sum_ao !== '0) begin failures++; $display("FAIL AOPT parallel reset %h", sum_ao); end
      if (sum_lo !== '0) begin failures++; $display("FAIL LOPT parallel reset %h", sum_lo); end
      release u_aopt.c;
      release u_lopt.c;
      cin = DR_SPACER; #1;
    end
    $display("carry chain from cin: 1-4:%0d 5-8:%0d 9-16:%0d 17-32:%0d",
             chain_bin[0], chain_bin[1], chain_bin[2], chain_bin[3]);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (chain_bin[k] == 0) begin failures++; $display("FAIL chain bin %0d never exercised", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
