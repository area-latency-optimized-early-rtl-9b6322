// tb_rca_latency: forward and reverse latency of the relative-timed ripple carry
// adder, counted in full adder delays.
//
// The RTL cells are zero-delay. Here a 32-stage adder is assembled from the
// real cells (aopt_eo_fa and lopt_eo_fa), and each cell's sum and carry outputs
// pass through a testbench-side delay of T = 10 time units, so one time step of
// T stands for one full adder delay. For every vector the testbench measures:
//   forward latency  all inputs valid at once -> last output valid;
//   reverse latency  all inputs spacer at once -> last output spacer.
// The forward latency is compared with a carry-arrival model computed here:
// carry into stage 0 at 0; into stage q+1 at T if stage q generates or kills,
// else at (arrival into q) + T; each sum T after max(0, its carry arrival);
// the maximum over all outputs is m x T, m being the longest carry chain.
// The reverse latency must be exactly T for every vector, whatever m is; the
// cycle time is then (m + 1) x T. Along the way it checks, during each reset,
// that no stage's sum reaches the spacer before its carry input has (with equal
// cell delays both fall together, so the relative-timing assumption holds with
// zero margin; real cells need the margin discussed in the README), and bins m as
// 1-4, 5-8, 9-16 and 17-32 stages, requiring every bin.
module tb_rca_latency;
  import dr_pkg::*;

  localparam int unsigned N = 32;
  localparam int T = 10;

  dr_t [N-1:0] a, b;
  dr_t cin;
  int checks = 0, failures = 0;
  int chain_bin [4];
  longint sum_fwd [2];

  dr_t [N-1:0] sum_k  [2];   // delayed sums, per cell kind (0 AOPT, 1 LOPT)
  dr_t [N:0]   carry_k [2];  // delayed carries
  dr_t [N-1:0] sum_raw [2];
  dr_t [N-1:0] cout_raw [2];

  for (genvar k = 0; k < 2; k++) begin : g_kind
    assign carry_k[k][0] = cin;
    for (genvar q = 0; q < N; q++) begin : g_stage
      if (k == 0) begin : g_a
        aopt_eo_fa u_fa (.a(a[q]), .b(b[q]), .cin(carry_k[k][q]), .sum(sum_raw[k][q]), .cout(cout_raw[k][q]));
      end else begin : g_l
        lopt_eo_fa u_fa (.a(a[q]), .b(b[q]), .cin(carry_k[k][q]), .sum(sum_raw[k][q]), .cout(cout_raw[k][q]));
      end
      assign #T sum_k[k][q]     = sum_raw[k][q];
      assign #T carry_k[k][q+1] = cout_raw[k][q];
    end
  end

  function automatic logic all_valid(input int k);
    logic v = dr_is_valid(carry_k[k][N]);
    for (int q = 0; q < N; q++) v &= dr_is_valid(sum_k[k][q]);
    return v;
  endfunction

  function automatic logic all_spacer(input int k);
    return sum_k[k] == '0 && carry_k[k][N] == DR_SPACER;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_vector(input logic [N-1:0] va, input logic [N-1:0] vb, input logic vc);
    logic [N:0] s;
    int tc, tmax, m;
    time t0;
    int fwd [2], rev [2];
    int t_sum_sp [2][N+1], t_car_sp [2][N+1];
    s = {1'b0, va} + {1'b0, vb} + (N+1)'(vc);
    // model of the forward latency
    tc = 0; tmax = 0;
    for (int q = 0; q < N; q++) begin
      if (tc + T > tmax) tmax = tc + T;          // sum of stage q
      tc = (va[q] == vb[q]) ? T : tc + T;        // carry into q+1
    end
    if (tc > tmax) tmax = tc;
    m = tmax / T;
    if (m <= 4) chain_bin[0]++; else if (m <= 8) chain_bin[1]++;
    else if (m <= 16) chain_bin[2]++; else chain_bin[3]++;
    // forward phase
    t0 = $time;
    fwd = '{-1, -1};
    for (int q = 0; q < N; q++) begin a[q] = dr_encode(va[q]); b[q] = dr_encode(vb[q]); end
    cin = dr_encode(vc);
    for (int t = 0; t <= (N + 2) * T; t++) begin
      #1;
      for (int k = 0; k < 2; k++) if (fwd[k] < 0 && all_valid(k)) fwd[k] = int'($time - t0);
    end
    for (int k = 0; k < 2; k++) begin
      logic [N:0] got;
      for (int q = 0; q < N; q++) got[q] = sum_k[k][q].r1;
      got[N] = carry_k[k][N].r1;
      checks += 2;
      if (got !== s) begin failures++; $display("FAIL kind %0d sum %h expected %h", k, got, s); end
      if (fwd[k] != tmax) begin
        failures++;
        $display("FAIL kind %0d forward latency %0d expected %0d (a=%h b=%h c=%0b)", k, fwd[k], tmax, va, vb, vc);
      end
      sum_fwd[k] += fwd[k];
    end
    // reverse phase: every input to the spacer at once
    t0 = $time;
    rev = '{-1, -1};
    a = '0; b = '0; cin = DR_SPACER;
    for (int k = 0; k < 2; k++) for (int q = 0; q <= N; q++) begin t_sum_sp[k][q] = -1; t_car_sp[k][q] = -1; end
    for (int t = 0; t <= (N + 2) * T; t++) begin
      #1;
      for (int k = 0; k < 2; k++) begin
        if (rev[k] < 0 && all_spacer(k)) rev[k] = int'($time - t0);
        for (int q = 0; q < N; q++) begin
          if (t_sum_sp[k][q] < 0 && sum_k[k][q] == DR_SPACER) t_sum_sp[k][q] = t;
          if (t_car_sp[k][q] < 0 && carry_k[k][q] == DR_SPACER) t_car_sp[k][q] = t;
        end
      end
    end
    // relative-timing assumption: no sum reaches the spacer before its carry input
    for (int k = 0; k < 2; k++)
      for (int q = 1; q < N; q++) begin
        checks++;
        if (t_car_sp[k][q] > t_sum_sp[k][q]) begin
          failures++;
          $display("FAIL kind %0d stage %0d: sum spacer at %0d before carry input at %0d", k, q, t_sum_sp[k][q], t_car_sp[k][q]);
        end
      end
    for (int k = 0; k < 2; k++) begin
      checks++;
      if (rev[k] != T) begin
        failures++;
        $display("FAIL kind %0d reverse latency %0d expected %0d (chain %0d)", k, rev[k], T, m);
      end
    end
  endtask

  initial begin
    logic [N-1:0] va, vb;
    int vectors;
    a = '0; b = '0; cin = DR_SPACER;
    #(3 * T);
    // directed: propagate chains of every length from cin
    for (int l = 0; l <= N; l++) begin
      va = (l == 0) ? '0 : ({N{1'b1}} >> (N - l));
      one_vector(va, '0, 1'b1);
    end
    vectors = N + 1;
    for (int i = 0; i < 300; i++) begin
      va = $urandom; vb = $urandom;
      one_vector(va, vb, 1'($urandom));
      vectors++;
    end
    $display("mean forward latency over %0d vectors: AOPT %0d.%02d T, LOPT %0d.%02d T; reverse latency 1 T",
             vectors, sum_fwd[0] / (T * vectors), (sum_fwd[0] * 100 / (T * vectors)) % 100,
             sum_fwd[1] / (T * vectors), (sum_fwd[1] * 100 / (T * vectors)) % 100);
    $display("longest carry chain: 1-4:%0d 5-8:%0d 9-16:%0d 17-32:%0d",
             chain_bin[0], chain_bin[1], chain_bin[2], chain_bin[3]);
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (chain_bin[k] == 0) begin failures++; $display("FAIL chain bin %0d never exercised", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
