// rt_rca -- N-bit relative-timed ripple carry adder, dual rail.
//
// Function.  Adds two N-bit dual-rail operands and a dual-rail carry input.
// Stage k is an eo_full_adder; the carry output of stage k is the carry
// input of stage k+1, and the carry output of the last stage is cout.
//
// Forward (data) latency depends on the data: a stage that generates or
// kills its carry does so from its own operands, so the carry only ripples
// through runs of propagating stages, and the latency grows with the longest
// such run m rather than with N.  Reverse (spacer) latency is constant:
// because each stage resets early from its own operands, all stages return
// to the spacer in parallel, one full adder delay after the operands do.
//
// Relative-timing assumption.  Early reset means the fall of an internal
// carry (carry[k], the carry output of stage k-1) is not acknowledged by
// stage k.  The adder is correct only if that carry reaches the spacer
// before the sum of stage k does.  This holds when the operands of all
// stages are returned to the spacer together, as a stage register does.
// It involves just two neighbouring stages, so it does not depend on N.
// Testbenches check it with a monitor on the internal `carry` nets.
//
// Interface: a, b and sum are packed arrays of dual-rail bits, bit 0 least
// significant.  DLY is the per-cell delay passed to every full adder (0 =
// zero-delay functional model).
//
// The cascade and the default width N = 32 follow the published design; the
// array packaging is this design's own.
//
// Lint and synthesis report combinational loops here: each is the output
// feedback of a C-element (see c_element), which is how this asynchronous
// design stores state.  There are no other loops and no clock.
module rt_rca
  import dr_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned DLY = 0
) (
  input  dr_t [N-1:0] a,
  input  dr_t [N-1:0] b,
  input  dr_t         cin,
  output dr_t [N-1:0] sum,
  output dr_t         cout
);

  // carry[k] is the carry input of stage k; carry[N] is the carry output.
  dr_t [N:0] carry;

  assign carry[0] = cin;

  for (genvar k = 0; k < N; k++) begin : g_fa
    eo_full_adder #(.DLY(DLY)) u_fa (
      .a    (a[k]),
      .b    (b[k]),
      .cin  (carry[k]),
      .sum  (sum[k]),
      .cout (carry[k+1])
    );
  end

  assign cout = carry[N];

endmodule
