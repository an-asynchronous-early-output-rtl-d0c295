// dr_pkg -- dual-rail types and helpers shared by the early output adder
// design.
//
// A logical bit X travels on two wires X1 and X0.  X = 1 is sent as
// (X1, X0) = (1, 0), X = 0 as (0, 1); both wires low is the "spacer" that
// separates two data words under the 4-phase return-to-zero protocol.
// (1, 1) is not a legal code word.  This encoding is the one the adder is
// defined for; the struct layout and the helper functions are this design's
// own packaging of it.
package dr_pkg;

  // One dual-rail wire pair: r1 is the "true" rail (X1), r0 the "false"
  // rail (X0).
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  localparam dr_t DR_SPACER = '{r1: 1'b0, r0: 1'b0};
  localparam dr_t DR_ONE    = '{r1: 1'b1, r0: 1'b0};
  localparam dr_t DR_ZERO   = '{r1: 1'b0, r0: 1'b1};

  // Encode a single-rail bit as a dual-rail code word.
  function automatic dr_t dr_encode(input logic b);
    return b ? DR_ONE : DR_ZERO;
  endfunction

  // A wire pair carries valid data when exactly one rail is high.
  function automatic logic dr_is_valid(input dr_t x);
    return x.r1 ^ x.r0;
  endfunction

  function automatic logic dr_is_spacer(input dr_t x);
    return x == DR_SPACER;
  endfunction

endpackage
