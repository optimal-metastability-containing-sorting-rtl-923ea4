// out_m -- the output operator out_M of the MC sorter: from the comparison
// state s^(i-1) of the preceding bits and the input bits g_i h_i it produces
// bit i of max{g,h} and of min{g,h}.
//
// Per state: 00 -> (max, min) = (g_i OR h_i, g_i AND h_i); 11 (reflected
// order) -> (AND, OR); 10 (g > h) -> (g_i, h_i); 01 (g < h) -> (h_i, g_i).
// As Boolean sums of all prime implicants,
//     o_1 = b_1 (b_2 + NOT s_2) + b_2 NOT s_1
//     o_2 = b_2 (b_1 + s_1)     + b_1 s_2
// so the gate-level circuit is the metastable closure; in particular a
// metastable state MM with g_i = h_i passes g_i h_i through unchanged.  Each
// bit is one xmux with the input wiring from the paper's xmux table
// (o_1: sel1 = NOT s_1, sel2 = NOT s_2, x = b_2, y = b_1;
//  o_2: sel1 = s_2, sel2 = s_1, x = b_1, y = b_2).
//
// Interface: s = s^(i-1), b = g_i h_i, o = g'_i h'_i (max bit, min bit).
// Timing: combinational; one inverter level plus one xmux.
module out_m
  import mc_pkg::*;
(
  input  tpair_t s,
  input  tpair_t b,
  output tpair_t o
);

  tern_t ns1, ns2;

  kleene_gate #(.OP(K_INV)) u_ns1 (.a(s.b1), .b(K0), .y(ns1));
  kleene_gate #(.OP(K_INV)) u_ns2 (.a(s.b2), .b(K0), .y(ns2));

  xmux u_max (.sel1(ns1),  .sel2(ns2),  .x(b.b2), .y(b.b1), .o(o.b1));
  xmux u_min (.sel1(s.b2), .sel2(s.b1), .x(b.b1), .y(b.b2), .o(o.b2));

endmodule
