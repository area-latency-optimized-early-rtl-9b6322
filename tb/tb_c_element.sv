// tb_c_element: self-checking test of the 2-input Muller C-element.
//
// Walks the gate through every input combination from both output states and
// checks the rule "follow when the inputs agree, hold when they differ", plus
// the clear input. Expected values come from a small reference state variable.
module tb_c_element;

  logic a, b, rst, z;
  logic ref_z;
  int checks = 0, failures = 0;

  c_element dut (.a(a), .b(b), .rst(rst), .z(z));

  task automatic apply(input logic na, input logic nb, input logic nrst);
    a = na; b = nb; rst = nrst;
    #1;
    if (nrst) ref_z = 1'b0;
    else if (na == nb) ref_z = na;
    checks++;
    if (z !== ref_z) begin
      failures++;
      $display("FAIL a=%0b b=%0b rst=%0b z=%0b expected %0b", na, nb, nrst, z, ref_z);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_z = 1'b0;
    apply(1'b1, 1'b1, 1'b1);  // clear while inputs are both 1
    apply(1'b0, 1'b0, 1'b0);
    // Deterministic walk covering hold in both states.
    apply(1'b1, 1'b0, 1'b0);  // hold 0
    apply(1'b0, 1'b1, 1'b0);  // hold 0
    apply(1'b1, 1'b1, 1'b0);  // rise
    apply(1'b0, 1'b1, 1'b0);  // hold 1
    apply(1'b1, 1'b0, 1'b0);  // hold 1
    apply(1'b0, 1'b0, 1'b0);  // fall
    apply(1'b1, 1'b1, 1'b0);
    apply(1'b1, 1'b0, 1'b1);  // clear from 1
    for (int i = 0; i < 200; i++) apply(1'($urandom), 1'($urandom), ($urandom % 16) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
