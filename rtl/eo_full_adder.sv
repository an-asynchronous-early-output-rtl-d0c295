// eo_full_adder -- dual-rail early output (early reset) full adder.
//
// Function.  Adds the dual-rail bits a, b and cin and produces the dual-rail
// sum and carry.  With a valid data word on all inputs it produces a valid
// sum and carry; with the spacer it returns every output to the spacer.
//
// Structure (eleven cells, named as in the adder's gate-level schematic):
//   CG1  (AO22)  net1  = a0.b0 + a1.b1          operands equal
//   CG2  (AO22)  net2  = a0.b1 + a1.b0          operands differ (propagate)
//   AND1         net4  = a1.b1                  carry generate
//   AND2         net5  = a0.b0                  carry kill
//   OR           net3  = net1 + net2            operand completion (valid
//                                               once a and b have both arrived)
//   CG3  (AO22)  asum1 = net1.cin1 + net2.cin0
//   CG4  (AO22)  asum0 = net1.cin0 + net2.cin1
//   CG5  (AO21)  cout1 = net2.cin1 + net4
//   CG6  (AO21)  cout0 = net2.cin0 + net5
//   CE1  (C)     sum1  = C(asum1, net3)
//   CE2  (C)     sum0  = C(asum0, net3)
// These are the factorised disjoint sum-of-products equations
//   SUM1  = (A0B0 + A1B1)CIN1 + (A0B1 + A1B0)CIN0
//   SUM0  = (A0B0 + A1B1)CIN0 + (A0B1 + A1B0)CIN1
//   COUT1 = (A0B1 + A1B0)CIN1 + A1B1
//   COUT0 = (A0B1 + A1B0)CIN0 + A0B0
//
// Behaviour.  Early set of the carry: on generate (a1=b1=1) or kill
// (a0=b0=1) the carry becomes valid without waiting for cin; on propagate it
// follows cin.  The sum always waits for cin.  Early reset: once either a or
// b has returned to the spacer, net1..net5 fall, so both sum and carry return
// to the spacer even while cin (and the other operand) still hold data.  The
// C-elements CE1/CE2 keep the sum valid until the operand completion signal
// net3 falls.
//
// Timing.  DLY is the delay of every cell in simulation time units (0 by
// default, a zero-delay functional model; testbenches use 1 for a unit-delay
// gate-level model).  With unit delays the carry is ready 2 cells after a and
// b (generate/kill) or 1 cell after cin (propagate), and the sum 3 cells
// after the operands or 2 after cin.  The spacer reaches every output within
// 3 cells of a or b, independent of cin.
//
// The cell list, the net names and the equations follow the published
// schematic.  Writing each cell as a continuous assignment, and the delay
// parameter, are this design's choices.
//
// Lint and synthesis report combinational loops here: each is the output
// feedback of a C-element (see c_element), which is how this asynchronous
// design stores state.  There are no other loops and no clock.
`include "cell.svh"

module eo_full_adder
  import dr_pkg::*;
#(
  parameter int unsigned DLY = 0
) (
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic net1, net2, net3, net4, net5;
  logic asum1, asum0;

  // Operand stage.
  `CELL(g_cg1,  net1, (a.r0 & b.r0) | (a.r1 & b.r1))   // CG1, AO22
  `CELL(g_cg2,  net2, (a.r0 & b.r1) | (a.r1 & b.r0))   // CG2, AO22
  `CELL(g_and1, net4, a.r1 & b.r1)                     // AND1
  `CELL(g_and2, net5, a.r0 & b.r0)                     // AND2
  `CELL(g_or,   net3, net1 | net2)                     // OR

  // Sum-producing cells.
  `CELL(g_cg3, asum1, (net1 & cin.r1) | (net2 & cin.r0)) // CG3, AO22
  `CELL(g_cg4, asum0, (net1 & cin.r0) | (net2 & cin.r1)) // CG4, AO22

  // Carry-producing cells.
  `CELL(g_cg5, cout.r1, (net2 & cin.r1) | net4)          // CG5, AO21
  `CELL(g_cg6, cout.r0, (net2 & cin.r0) | net5)          // CG6, AO21

  // Sum outputs held by C-elements against the operand completion net3.
  c_element #(.DLY(DLY)) u_ce1 (.a(asum1), .b(net3), .y(sum.r1));
  c_element #(.DLY(DLY)) u_ce2 (.a(asum0), .b(net3), .y(sum.r0));

endmodule
