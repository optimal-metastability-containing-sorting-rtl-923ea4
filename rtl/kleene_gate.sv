// kleene_gate -- one basic CMOS gate (inverter, AND, OR, NAND or NOR) as it
// behaves on possibly metastable inputs.
//
// Standard CMOS gates compute the metastable closure of their Boolean
// function, i.e. Kleene's three-valued logic: a controlling stable input
// (0 for AND/NAND, 1 for OR/NOR) fixes the output even if the other input is
// metastable; otherwise a metastable input makes the output metastable.  This
// follows from modelling a conducting transistor as a low and a blocking one
// as a high resistance, with a metastable gate voltage giving an arbitrary
// resistance.  The gate table and the transistor argument are the paper's;
// the two-rail encoding of M (see mc_pkg) and the OP parameter are this
// implementation's.
//
// Interface: a, b, y are tern_t; b is unused for K_INV.
// Timing: purely combinational, one gate level.
module kleene_gate
  import mc_pkg::*;
#(
  parameter kgate_e OP = K_AND
) (
  input  tern_t a,
  input  tern_t b,
  output tern_t y
);

  always_comb begin
    unique case (OP)
      K_INV:   y = k_not(a);
      K_AND:   y = k_and(a, b);
      K_OR:    y = k_or(a, b);
      K_NAND:  y = k_not(k_and(a, b));
      K_NOR:   y = k_not(k_or(a, b));
      default: y = k_not(a);
    endcase
  end

  // The b operand is not used by an inverter.
  logic unused_b;
  assign unused_b = (OP == K_INV) ? ^b : 1'b0;

endmodule
