// tb_lopt_eo_fa: self-checking test of the latency optimized early output full adder.
//
// For all eight operand combinations it checks, against plain binary
// arithmetic:
//  * valid inputs give the right dual-rail sum and carry;
//  * with A and B valid but the carry input still a spacer, the carry output is
//    already valid on generate (A=B=1) and kill (A=B=0) and still a spacer on
//    propagate, and the sum stays a spacer (early output of the carry);
//  * from a valid state, returning only A, or only B, to the spacer resets both
//    outputs (early reset); returning only the carry input leaves the sum
//    held by its C-element and the carry valid only on generate/kill;
//  * no output ever shows both rails high.
module tb_lopt_eo_fa;
  import dr_pkg::*;

  dr_t a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  lopt_eo_fa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic expect_dr(input string what, input dr_t got, input dr_t exp);
    checks++;
    if (got !== exp || (got.r1 && got.r0)) begin
      failures++;
      $display("FAIL %s: got %b%b expected %b%b", what, got.r1, got.r0, exp.r1, exp.r0);
    end
  endtask

  task automatic all_spacer();
    a = DR_SPACER; b = DR_SPACER; cin = DR_SPACER; #1;
    expect_dr("spacer sum", sum, DR_SPACER);
    expect_dr("spacer cout", cout, DR_SPACER);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] s;
    logic gk;
    all_spacer();
    for (int rep = 0; rep < 4; rep++) begin
      for (int v = 0; v < 8; v++) begin
        logic va, vb, vc;
        {va, vb, vc} = 3'(v);
        s  = 2'(va) + 2'(vb) + 2'(vc);
        gk = (va == vb);
        // 1. operands first, carry later
        a = dr_encode(va); b = dr_encode(vb); #1;
        expect_dr("early cout", cout, gk ? dr_encode(va) : DR_SPACER);
        expect_dr("sum waits for cin", sum, DR_SPACER);
        cin = dr_encode(vc); #1;
        expect_dr("sum", sum, dr_encode(s[0]));
        expect_dr("cout", cout, dr_encode(s[1]));
        // 2. early reset from the operands, chosen per repetition
        case (rep)
          0: begin a = DR_SPACER; #1; end
          1: begin b = DR_SPACER; #1; end
          default: begin
            cin = DR_SPACER; #1;
            expect_dr("sum held with cin spacer", sum, dr_encode(s[0]));
            expect_dr("cout with cin spacer", cout, gk ? dr_encode(va) : DR_SPACER);
            if (rep == 2) a = DR_SPACER; else b = DR_SPACER;
            #1;
          end
        endcase
        expect_dr("early reset sum", sum, DR_SPACER);
        if (rep < 2)
          expect_dr("early reset cout", cout, DR_SPACER);
        all_spacer();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
