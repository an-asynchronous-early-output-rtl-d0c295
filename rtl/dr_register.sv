// dr_register -- W-wire dual-rail 4-phase stage register.
//
// Function.  Sits between an asynchronous logic block and its sender.  While
// its acknowledge input ackin is 1 it lets a data word through; once ackin
// has fallen to 0 it lets the spacer through.  Each rail of each wire is one
// 2-input C-element joining the incoming rail with ackin:
//   q[i].r1 = C(d[i].r1, ackin),   q[i].r0 = C(d[i].r0, ackin).
// A rail therefore rises only when the data rail and ackin are both 1 and
// falls only when both are 0, so the register holds its data word while the
// sender is already resetting and holds the spacer while the next word is
// already arriving.  This is the standard C-element latch of 4-phase
// dual-rail pipelines.
//
// Handshake.  ackin is the inverse of the acknowledge output of the next
// stage: 1 while the next stage is empty (its ackout is 0), 0 once the next
// stage has captured a word.  Inverting that signal is left to the parent
// module.
//
// Timing: one C-element delay DLY from d or ackin to q.  No reset: the
// register is cleared by driving the spacer on d with ackin at 0, the idle
// state of the 4-phase protocol.
//
// The register's role and handshake follow the published system stage; its
// C-element construction is this design's choice, since the stage registers
// are described only by what they do.
//
// Lint and synthesis report combinational loops here: each is the output
// feedback of a C-element (see c_element), which is how this asynchronous
// design stores state.  There are no other loops and no clock.
module dr_register
  import dr_pkg::*;
#(
  parameter int unsigned W   = 65,
  parameter int unsigned DLY = 0
) (
  input  dr_t [W-1:0] d,
  input  logic        ackin,
  output dr_t [W-1:0] q
);

  for (genvar i = 0; i < W; i++) begin : g_bit
    c_element #(.DLY(DLY)) u_ce_r1 (.a(d[i].r1), .b(ackin), .y(q[i].r1));
    c_element #(.DLY(DLY)) u_ce_r0 (.a(d[i].r0), .b(ackin), .y(q[i].r0));
  end

endmodule
