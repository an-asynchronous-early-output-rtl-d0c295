// rt_rca_stage -- asynchronous system stage around the N-bit relative-timed
// ripple carry adder (top level).
//
// Structure (sender -> current stage register -> adder -> next stage
// register -> receiver):
//
//   a_in,b_in,cin_in --> u_reg_cur --+--> u_rca --> u_reg_nxt --+--> sum_out, cout_out
//                          ^ ackin   |                 ^ ackin   |
//                          |      u_cd_cur             |      u_cd_nxt
//                          |         |                 |         |
//   ackout_cur <-----------|---------+    ackout_rx ---+(inv)    +--> ackout_nxt
//                          +------------(inv)--------------------+
//
// * u_reg_cur holds the 2N+1 dual-rail operand wires (a, b, cin); its
//   completion detector u_cd_cur acknowledges them to the sender on
//   ackout_cur.  Because it watches the register output, a late return to the
//   spacer of an operand that the adder already ignores (the adder resets
//   early) is still acknowledged here.
// * u_rca is the relative-timed ripple carry adder.
// * u_reg_nxt captures the N+1 result wires (sum, cout); its detector
//   u_cd_nxt drives ackout_nxt, which, inverted, is the ackin of u_reg_cur.
// * ackout_rx is the acknowledge output of whatever consumes sum_out; it is
//   inverted into the ackin of u_reg_nxt.
//
// 4-phase return-to-zero protocol, as seen at the ports.  The sender puts a
// data word on a_in/b_in/cin_in and waits for ackout_cur = 1, then drives the
// spacer and waits for ackout_cur = 0.  A result word appears on
// sum_out/cout_out together with ackout_nxt = 1; the receiver raises
// ackout_rx when it has taken it and lowers it after the spacer
// (ackout_nxt = 0).  Idle state: all data wires spacer, ackout_rx = 0.  There
// is no reset: the design is initialised by holding that idle state, which
// clears every C-element.
//
// Timing: no clock.  DLY is the per-cell delay used in simulation (0 = zero
// delay).  With the registers resetting all operand wires together, the
// adder's internal carries fall before the sums that depend on them, which
// is the adder's relative-timing assumption.
//
// Sender constraint (this design's finding, not stated in the published
// design): the sender must return the whole operand bus (a, b, cin) to the
// spacer together, within a few cell delays.  Because the adder resets early,
// the spacer of the operands that arrive first can already reach u_reg_nxt
// and be acknowledged by the receiver, which raises ackin_cur again before
// the late operand wires have passed u_reg_cur.  Those wires are then held
// as data in u_reg_cur, u_cd_cur never drops ackout_cur, and the handshake
// deadlocks.  A sender that drives all operand wires from one register of
// the same kind meets this naturally.
//
// The stage organisation, the inverted acknowledge between stages and the
// 32-bit width follow the published design; the register and completion
// detector construction and the port names are this design's choices.
//
// Lint and synthesis report combinational loops here: each is the output
// feedback of a C-element (see c_element), which is how this asynchronous
// design stores state.  There are no other loops and no clock.
`include "cell.svh"

module rt_rca_stage
  import dr_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned DLY = 0
) (
  // From the sender.
  input  dr_t [N-1:0] a_in,
  input  dr_t [N-1:0] b_in,
  input  dr_t         cin_in,
  output logic        ackout_cur,
  // To the receiver.
  output dr_t [N-1:0] sum_out,
  output dr_t         cout_out,
  output logic        ackout_nxt,
  input  logic        ackout_rx
);

  localparam int unsigned WIN  = 2 * N + 1;
  localparam int unsigned WOUT = N + 1;

  dr_t [WIN-1:0]  op_d, op_q;
  dr_t [WOUT-1:0] res_d, res_q;
  dr_t [N-1:0]    sum_c;
  dr_t            cout_c;
  logic           ackin_cur, ackin_nxt;

  // Operand bus: {cin, b, a}.
  assign op_d = {cin_in, b_in, a_in};

  // Inverted acknowledges between stages.
  `CELL(g_inv_cur, ackin_cur, ~ackout_nxt)
  `CELL(g_inv_nxt, ackin_nxt, ~ackout_rx)

  // Current stage register and its completion detector.
  dr_register #(.W(WIN), .DLY(DLY)) u_reg_cur (
    .d     (op_d),
    .ackin (ackin_cur),
    .q     (op_q)
  );

  completion_detector #(.W(WIN), .DLY(DLY)) u_cd_cur (
    .d      (op_q),
    .ackout (ackout_cur)
  );

  // Asynchronous logic block: the relative-timed RCA.
  rt_rca #(.N(N), .DLY(DLY)) u_rca (
    .a    (op_q[N-1:0]),
    .b    (op_q[2*N-1:N]),
    .cin  (op_q[2*N]),
    .sum  (sum_c),
    .cout (cout_c)
  );

  // Next stage register and its completion detector.
  assign res_d = {cout_c, sum_c};

  dr_register #(.W(WOUT), .DLY(DLY)) u_reg_nxt (
    .d     (res_d),
    .ackin (ackin_nxt),
    .q     (res_q)
  );

  completion_detector #(.W(WOUT), .DLY(DLY)) u_cd_nxt (
    .d      (res_q),
    .ackout (ackout_nxt)
  );

  assign sum_out  = res_q[N-1:0];
  assign cout_out = res_q[N];

endmodule
