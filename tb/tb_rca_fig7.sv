// tb_rca_fig7: the two-bit worked example of a relative-timed ripple carry
// adder (two early output full adders in cascade), run on both proposed full
// adders.
//
// Valid phase: stage 0 has A=1, B=1 (carry generate) with carry input 0;
// stage 1 has A=0, B=1 (carry propagate). Expected: sum bit 0 = 0, sum bit 1 =
// 0, carry out = 1, i.e. 0b10 + 0b11 + 0 = 0b101.
// Return-to-zero phase, partial: only B of stage 1 and A of stage 0 return to
// the spacer. Both sums and the carry out must already be spacers although the
// other two operand inputs and the carry input are still valid (early reset).
// Then the remaining inputs go to the spacer and everything must stay a spacer.
module tb_rca_fig7;
  import dr_pkg::*;

  dr_t [1:0] a, b, sum_ao, sum_lo;
  dr_t cin, cout_ao, cout_lo;
  int checks = 0, failures = 0;

  rt_rca #(.N(2), .FA_KIND(FA_AOPT)) u_aopt (.a(a), .b(b), .cin(cin), .sum(sum_ao), .cout(cout_ao));
  rt_rca #(.N(2), .FA_KIND(FA_LOPT)) u_lopt (.a(a), .b(b), .cin(cin), .sum(sum_lo), .cout(cout_lo));

  task automatic check(input string what, input dr_t [1:0] es, input dr_t ec);
    checks++;
    if (sum_ao !== es || cout_ao !== ec) begin
      failures++;
      $display("FAIL AOPT %s: sum=%b cout=%b expected %b %b", what, sum_ao, cout_ao, es, ec);
    end
    checks++;
    if (sum_lo !== es || cout_lo !== ec) begin
      failures++;
      $display("FAIL LOPT %s: sum=%b cout=%b expected %b %b", what, sum_lo, cout_lo, es, ec);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; cin = DR_SPACER; #1;
    check("initial spacer", '0, DR_SPACER);
    for (int rep = 0; rep < 3; rep++) begin
      a[0] = dr_encode(1'b1); b[0] = dr_encode(1'b1);   // A0_1 = B0_1 = 1
      a[1] = dr_encode(1'b0); b[1] = dr_encode(1'b1);   // A1_0 = B1_1 = 1
      cin  = dr_encode(1'b0);                           // C0_0 = 1
      #1;
      check("valid", {dr_encode(1'b0), dr_encode(1'b0)}, dr_encode(1'b1));
      b[1] = DR_SPACER; a[0] = DR_SPACER;               // B1_1 and A0_1 return to 0
      #1;
      check("partial RTZ", '0, DR_SPACER);
      a[1] = DR_SPACER; b[0] = DR_SPACER; cin = DR_SPACER;
      #1;
      check("full RTZ", '0, DR_SPACER);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
