// c_element -- 2-input Muller C-element.
//
// The output rises only when both inputs are 1, falls only when both are 0,
// and otherwise keeps its value, so it is a state-holding gate.  As in the
// adder's cell-level realisation it is built from one AO222 cell whose output
// is fed back:  y = a.b + a.y + b.y.  That feedback is the storage; the
// combinational loop that lint tools report on `y` is therefore intended and
// is the C-element itself.  There is no reset: under the 4-phase protocol
// both inputs are 0 (spacer) before the first data word, which clears y.
//
// Timing: DLY is the propagation delay of the cell in simulation time units.
// It defaults to 0 (zero-delay functional model); testbenches set it above 0
// to run a unit-delay gate-level simulation.  Synthesis ignores it.  With
// DLY > 0 the power-up value of y is arbitrary until both inputs have once
// been equal after time 0.
//
// The AO222-with-feedback construction follows the published design; the
// delay parameter is this design's own simulation aid.
`include "cell.svh"

module c_element #(
  parameter int unsigned DLY = 0
) (
  input  logic a,
  input  logic b,
  output logic y
);

  // AO222 with output feedback (y = ab + ay + by).
  `CELL(g_ao222, y, (a & b) | (a & y) | (b & y))

endmodule
