// completion_detector -- acknowledge generator for a W-wire dual-rail bus.
//
// Function.  ackout rises to 1 once every wire of the bus carries valid data
// and falls to 0 once every wire has returned to the spacer; while the bus
// is part-way between the two it keeps its previous value.  Placed at the
// output of a stage register, it acknowledges to the previous stage that a
// whole data word (or a whole spacer) has been received.
//
// Structure.  One 2-input OR per wire (r1 | r0) flags that the wire holds
// data.  The W flags are combined by a W-input C-element, built as a
// balanced binary tree of 2-input C-elements (W-1 of them, depth
// ceil(log2 W)).  Node i of the tree has children 2i+1 and 2i+2; the W flags
// are the leaves W-1 .. 2W-2 and node 0 is ackout.  Decomposing a wide
// C-element into a tree of 2-input C-elements keeps its behaviour, because
// each 2-input C-element only changes once both of its inputs agree.
//
// Timing: one OR delay plus ceil(log2 W) C-element delays (DLY each).
//
// The detector's role follows the published system stage.  Its OR/C-element
// tree is this design's choice: the stage's completion detector is described
// by what it does, and 2-input C-elements are the cells the design is
// built from.
//
// Lint and synthesis report combinational loops here: each is the output
// feedback of a C-element (see c_element), which is how this asynchronous
// design stores state.  There are no other loops and no clock.
`include "cell.svh"

module completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned W   = 65,
  parameter int unsigned DLY = 0
) (
  input  dr_t [W-1:0] d,
  output logic        ackout
);

  // Heap-ordered tree: nodes 0 .. W-2 are C-elements, W-1 .. 2W-2 leaves.
  logic [2*W-2:0] node;

  for (genvar i = 0; i < W; i++) begin : g_leaf
    `CELL(g_or, node[W-1+i], d[i].r1 | d[i].r0)
  end

  for (genvar n = 0; n < W - 1; n++) begin : g_tree
    c_element #(.DLY(DLY)) u_ce (
      .a (node[2*n+1]),
      .b (node[2*n+2]),
      .y (node[n])
    );
  end

  assign ackout = node[0];

endmodule
