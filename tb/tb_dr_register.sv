// tb_dr_register: self-checking test of the dual-rail C-element register.
//
// Checks the four-phase behaviour rail by rail against a reference model of
// "a rail follows its input when input and ACKIN agree, otherwise holds":
// with ACKIN = 1 valid data pass and a spacer is held back; with ACKIN = 0 the
// spacer passes and new valid data are held back; rst clears to the spacer.
// A random mix of input changes and ACKIN changes exercises every case.
module tb_dr_register;
  import dr_pkg::*;

  localparam int unsigned W = 8;

  logic rst, ackin;
  dr_t [W-1:0] d, q, ref_q;
  int checks = 0, failures = 0;
  int held_valid = 0, held_spacer = 0;

  dr_register #(.W(W)) dut (.rst(rst), .ackin(ackin), .d(d), .q(q));

  task automatic step();
    #1;
    for (int i = 0; i < W; i++) begin
      if (rst) ref_q[i] = DR_SPACER;
      else begin
        if (d[i].r1 == ackin) ref_q[i].r1 = ackin;
        if (d[i].r0 == ackin) ref_q[i].r0 = ackin;
      end
    end
    checks++;
    if (q !== ref_q) begin
      failures++;
      $display("FAIL d=%h ackin=%0b q=%h expected %h", d, ackin, q, ref_q);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_q = '0;
    rst = 1'b1; ackin = 1'b1; d = '0; step();
    rst = 1'b0; step();
    for (int t = 0; t < 400; t++) begin
      logic [W-1:0] v;
      v = $urandom;
      // valid word with ACKIN = 1: passes
      for (int i = 0; i < W; i++) d[i] = dr_encode(v[i]);
      step();
      // spacer while ACKIN still 1: held
      d = '0; step();
      if (q != '0) held_valid++;
      // ACKIN falls: the spacer passes
      ackin = 1'b0; step();
      // new valid word while ACKIN = 0: held back
      v = $urandom;
      for (int i = 0; i < W; i++) d[i] = dr_encode(v[i]);
      step();
      if (q == '0) held_spacer++;
      ackin = 1'b1; step();
      if (t % 50 == 0) begin rst = 1'b1; step(); rst = 1'b0; step(); end
    end
    checks++;
    if (held_valid == 0 || held_spacer == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
