// tb_completion_detector: self-checking test of the dual-rail completion detector.
//
// Two instances: W = 5 (the paper's 2-bit example, OR1-OR5 and C1-C4) and
// W = 65 (the 32-bit adder's inputs). Starting from all spacers, signals become
// valid one at a time in random order with random values; ACKOUT must stay 0
// until the last one has arrived and then be 1. They then return to the spacer
// one at a time; ACKOUT must stay 1 until the last one has left.
module tb_completion_detector;
  import dr_pkg::*;

  dr_t [4:0]  d5;
  dr_t [64:0] d65;
  logic ack5, ack65;
  int checks = 0, failures = 0;

  completion_detector #(.W(5))  u_cd5  (.d(d5),  .ackout(ack5));
  completion_detector #(.W(65)) u_cd65 (.d(d65), .ackout(ack65));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: ack=%0b expected %0b", what, got, exp);
    end
  endtask

  // Random permutation of 0..W-1 in order[].
  task automatic shuffle(input int w, ref int order[65]);
    for (int i = 0; i < w; i++) order[i] = i;
    for (int i = w - 1; i > 0; i--) begin
      int j, t;
      j = $urandom % (i + 1);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[65];
    d5 = '0; d65 = '0; #1;
    check("init 5", ack5, 1'b0);
    check("init 65", ack65, 1'b0);
    for (int rep = 0; rep < 40; rep++) begin
      // W = 5
      shuffle(5, order);
      for (int i = 0; i < 5; i++) begin
        d5[order[i]] = dr_encode(1'($urandom)); #1;
        check("5 rising", ack5, i == 4);
      end
      shuffle(5, order);
      for (int i = 0; i < 5; i++) begin
        d5[order[i]] = DR_SPACER; #1;
        check("5 falling", ack5, i != 4);
      end
      // W = 65
      shuffle(65, order);
      for (int i = 0; i < 65; i++) begin
        d65[order[i]] = dr_encode(1'($urandom)); #1;
        check("65 rising", ack65, i == 64);
      end
      shuffle(65, order);
      for (int i = 0; i < 65; i++) begin
        d65[order[i]] = DR_SPACER; #1;
        check("65 falling", ack65, i != 64);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
