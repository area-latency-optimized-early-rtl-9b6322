// tb_async_rca_system_aopt: the same end-to-end test as tb_async_rca_system, on
// the 32-bit stage built from the area optimized full adder instead.
//
// A producer process plays the previous pipeline stage and a consumer process
// the next one, both following the four-phase return-to-zero protocol:
//   producer: wait ack_o = 0, drive a valid word, wait ack_o = 1, return a random
//             subset of the inputs to the spacer, then the rest, wait ack_o = 0;
//   consumer: wait for a complete valid result, compare it with the binary sum,
//             wait a random time, raise ack_i, wait for the spacer, lower ack_i.
// It counts how often each mechanism of the design occurs and fails if one
// never does:
//   generate / kill / propagate     full adder conditions over all stages
//   chain 1-4 .. 17-32              length of the longest carry chain in a word
//   early reset                     an adder stage whose A or B input is back
//                                   to the spacer shows a spacer sum while the
//                                   input completion detector still holds ack_o
//   input stall                     a new word is held back by the input
//                                   register until the next stage releases the
//                                   previous result
//   output stall                    the consumer delays its acknowledge
module tb_async_rca_system_aopt;
  import dr_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned WORDS = 400;

  logic rst, ack_o, ack_i;
  dr_t [N-1:0] a_i, b_i, sum_o;
  dr_t cin_i, cout_o;

  int checks = 0, failures = 0;
  int n_gen = 0, n_kill = 0, n_prop = 0, n_early_reset = 0, n_in_stall = 0, n_out_stall = 0;
  int chain_bin [4];
  logic [N:0] expected [$];

  async_rca_system #(.FA_KIND(FA_AOPT)) dut (
    .rst(rst), .a_i(a_i), .b_i(b_i), .cin_i(cin_i), .ack_o(ack_o),
    .sum_o(sum_o), .cout_o(cout_o), .ack_i(ack_i)
  );

  function automatic logic all_valid(input dr_t [N-1:0] s, input dr_t c);
    logic v = dr_is_valid(c);
    for (int i = 0; i < N; i++) v &= dr_is_valid(s[i]);
    return v;
  endfunction

  function automatic logic [N:0] decode(input dr_t [N-1:0] s, input dr_t c);
    logic [N:0] r;
    for (int i = 0; i < N; i++) r[i] = s[i].r1;
    r[N] = c.r1;
    return r;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Producer: the previous stage.
  task automatic produce();
    for (int k = 0; k < WORDS; k++) begin
      logic [N-1:0] va, vb;
      logic vc;
      int run, longest;
      wait (ack_o == 1'b0);
      #($urandom % 3);
      va = $urandom; vb = $urandom; vc = 1'($urandom);
      if (k % 10 == 0) vb = ~va;             // force a long propagate chain now and then
      if (k % 10 == 5) vb = ~va ^ (N'(1) << ($urandom % N));
      expected.push_back({1'b0, va} + {1'b0, vb} + (N+1)'(vc));
      run = 1; longest = 1;                  // the chain starting at cin
      for (int q = 0; q < N; q++) begin
        if (va[q] & vb[q]) n_gen++;
        else if (!va[q] & !vb[q]) n_kill++;
        else n_prop++;
        if (va[q] != vb[q]) run++;
        else run = 1;
        if (run > longest) longest = run;
      end
      if (longest <= 4) chain_bin[0]++;
      else if (longest <= 8) chain_bin[1]++;
      else if (longest <= 16) chain_bin[2]++;
      else chain_bin[3]++;
      for (int q = 0; q < N; q++) begin a_i[q] = dr_encode(va[q]); b_i[q] = dr_encode(vb[q]); end
      cin_i = dr_encode(vc);
      #1;
      if (ack_o == 1'b0) n_in_stall++;
      wait (ack_o == 1'b1);
      #($urandom % 3);
      // Partial return to zero: a random subset of A/B inputs first.
      begin
        logic [N-1:0] sel, via_b;
        logic seen;
        sel = $urandom; via_b = $urandom;
        for (int q = 0; q < N; q++)
          if (sel[q]) begin
            if (via_b[q]) b_i[q] = DR_SPACER; else a_i[q] = DR_SPACER;
          end
        #1;
        seen = 1'b0;
        if (ack_o) begin
          for (int q = 0; q < N; q++) begin
            if (dr_is_spacer(dut.a[q]) || dr_is_spacer(dut.b[q])) begin
              checks++;
              seen = 1'b1;
              if (!dr_is_spacer(dut.sum[q])) begin
                failures++;
                $display("FAIL word %0d: stage %0d did not reset early", k, q);
              end
            end
          end
        end
        if (seen) n_early_reset++;
      end
      a_i = '0; b_i = '0; cin_i = DR_SPACER;
      wait (ack_o == 1'b0);
    end
  endtask

  // Consumer: the next stage.
  task automatic consume();
    for (int k = 0; k < WORDS; k++) begin
      int stall;
      while (!all_valid(sum_o, cout_o)) @(sum_o or cout_o);
      checks++;
      if (expected.size() == 0) begin
        failures++;
        $display("FAIL result %0d arrived with nothing expected", k);
      end else begin
        logic [N:0] e;
        e = expected.pop_front();
        if (decode(sum_o, cout_o) !== e) begin
          failures++;
          $display("FAIL word %0d: got %h expected %h", k, decode(sum_o, cout_o), e);
        end
      end
      stall = (k % 4 == 0) ? 2 + $urandom % 6 : 0;
      if (stall > 0) n_out_stall++;
      #(stall);
      ack_i = 1'b1;
      wait (sum_o == '0 && cout_o == DR_SPACER);
      #($urandom % 2);
      ack_i = 1'b0;
    end
  endtask

  task automatic count_ok(input string name, input int n);
    $display("  %-14s %0d", name, n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism '%s' never happened", name);
    end
  endtask

  initial begin
    rst = 1'b1; ack_i = 1'b0; a_i = '0; b_i = '0; cin_i = DR_SPACER;
    #2;
    checks++;
    if (ack_o !== 1'b0 || sum_o !== '0 || cout_o !== DR_SPACER) begin
      failures++;
      $display("FAIL reset state");
    end
    rst = 1'b0;
    #1;
    fork
      produce();
      consume();
    join
    checks++;
    if (expected.size() != 0) begin
      failures++;
      $display("FAIL %0d results never arrived", expected.size());
    end
    $display("mechanisms seen over %0d words:", WORDS);
    count_ok("generate", n_gen);
    count_ok("kill", n_kill);
    count_ok("propagate", n_prop);
    count_ok("chain 1-4", chain_bin[0]);
    count_ok("chain 5-8", chain_bin[1]);
    count_ok("chain 9-16", chain_bin[2]);
    count_ok("chain 17-32", chain_bin[3]);
    count_ok("early reset", n_early_reset);
    count_ok("input stall", n_in_stall);
    count_ok("output stall", n_out_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
