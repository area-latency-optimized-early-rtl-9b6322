// async_rca_system: the relative-timed ripple carry adder in its pipeline stage.
//
// This is the input-output mode asynchronous system of the paper's Fig. 1 and
// Fig. 6 with the N-bit relative-timed adder as its function block:
//
//   a_i,b_i,cin_i -> [input register] -+-> [rt_rca] -> [output register] -+-> sum_o, cout_o
//                        ^             |                    ^              |
//                        |     [completion det.] -> ack_o   |      [completion det.]
//                        |                                  |              |
//                        +------------- ~ --------------------------------+
//                                                           +---- ~ ack_i
//
// Protocol (four-phase return-to-zero on every channel): the previous stage
// puts a valid dual-rail word on a_i/b_i/cin_i; the input register passes it
// (its ACKIN is 1), the input completion detector raises ack_o, the adder
// computes and the output register captures the result, whose completion
// detector drops the input register's ACKIN. The previous stage then returns
// its inputs to the spacer (it may do so one signal at a time: the adder resets
// early and the input completion detector still waits for all of them), and the
// input register passes the spacer once ACKIN is 0; ack_o falls when the last
// input is a spacer. On the output side the following stage raises ack_i when
// it has taken sum_o/cout_o and lowers it when it has seen the spacer.
//
// The structure, the registers made of C-elements and the OR/C-element
// completion detectors follow the paper. The output register's completion
// detector covering cout as well as the sums, the active-high rst that clears
// both registers to the spacer, and the port names are this design's choices.
//
// The handshake forms a ring (input register -> adder -> output register ->
// completion detector -> inverter -> input register ACKIN) that tools report as
// a combinational loop. It is the four-phase control loop of the pipeline and
// is intentional; with all C-elements state-holding it settles after every
// input change. There is no clock anywhere in the design.
module async_rca_system
  import dr_pkg::*;
#(
  parameter int unsigned N       = 32,
  parameter fa_kind_e    FA_KIND = FA_LOPT
) (
  input  logic        rst,
  // input channel, from the previous stage
  input  dr_t [N-1:0] a_i,
  input  dr_t [N-1:0] b_i,
  input  dr_t         cin_i,
  output logic        ack_o,   // ACKOUT of the input completion detector
  // output channel, to the next stage
  output dr_t [N-1:0] sum_o,
  output dr_t         cout_o,
  input  logic        ack_i    // ACKOUT of the next stage's completion detector
);

  localparam int unsigned WI = 2 * N + 1;
  localparam int unsigned WO = N + 1;

  dr_t [WI-1:0] in_d, in_q;
  dr_t [WO-1:0] out_d, out_q;
  dr_t [N-1:0]  a, b, sum;
  dr_t          cin, cout;
  logic         out_ack;

  assign in_d = {cin_i, b_i, a_i};

  dr_register #(.W(WI)) u_in_reg (
    .rst(rst), .ackin(~out_ack), .d(in_d), .q(in_q)
  );

  completion_detector #(.W(WI)) u_in_cd (.d(in_q), .ackout(ack_o));

  assign a   = in_q[N-1:0];
  assign b   = in_q[2*N-1:N];
  assign cin = in_q[2*N];

  rt_rca #(.N(N), .FA_KIND(FA_KIND)) u_rca (
    .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout)
  );

  assign out_d = {cout, sum};

  dr_register #(.W(WO)) u_out_reg (
    .rst(rst), .ackin(~ack_i), .d(out_d), .q(out_q)
  );

  completion_detector #(.W(WO)) u_out_cd (.d(out_q), .ackout(out_ack));

  assign sum_o  = out_q[N-1:0];
  assign cout_o = out_q[N];

endmodule
