// xmux -- extended multiplexer, the one gate-level cell from which both
// prefix operators of the MC sorter are built.
//
//     o = y * (x + sel2)  +  x * sel1
//
// With sel1 = NOT sel2 it is a multiplexer selecting x (sel1 = 1) or y; but
// unlike a standard transmission-gate or AND-OR multiplexer it keeps the
// consensus term x*y (through the OR with sel2), so a metastable select with
// equal data inputs x = y still gives a stable output.  The structure (an
// OR of sel2 and x, an AND of x and sel1, an AND of y with the first OR, and
// a final OR) follows the paper's xmux schematic; each gate is a
// kleene_gate, so the whole cell computes the Kleene closure of its formula.
//
// Interface: four tern_t inputs, one tern_t output.
// Timing: combinational, three gate levels (OR, AND, OR).
module xmux
  import mc_pkg::*;
(
  input  tern_t sel1,
  input  tern_t sel2,
  input  tern_t x,
  input  tern_t y,
  output tern_t o
);

  tern_t x_or_s2, x_and_s1, y_and;

  kleene_gate #(.OP(K_OR))  u_or1  (.a(sel2),    .b(x),        .y(x_or_s2));
  kleene_gate #(.OP(K_AND)) u_and1 (.a(x),       .b(sel1),     .y(x_and_s1));
  kleene_gate #(.OP(K_AND)) u_and2 (.a(y),       .b(x_or_s2),  .y(y_and));
  kleene_gate #(.OP(K_OR))  u_or2  (.a(y_and),   .b(x_and_s1), .y(o));

endmodule
