// cell.svh -- one standard cell as a continuous assignment with an optional
// simulation delay.
//
// `CELL(label, lhs, rhs) drives lhs from the cell function rhs.  In a module
// with an `int unsigned DLY` parameter, DLY == 0 gives a plain assignment
// (zero-delay model, settles by itself from any power-up state); DLY > 0
// gives an assignment delayed by DLY time units (gate-level timing model).
// Synthesis treats both the same.  `label` names the generate block.
//
// The cell-per-assignment style mirrors the published design's use of
// standard cells; the macro and its delay switch are this design's own.
`ifndef CELL_SVH
`define CELL_SVH
`define CELL(label, lhs, rhs) \
  if (DLY == 0) begin : label \
    assign lhs = rhs; \
  end else begin : label \
    assign #(DLY) lhs = rhs; \
  end
`endif
