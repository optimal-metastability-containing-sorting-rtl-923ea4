// diamond_m -- the associative operator s <>_M b of the MC sorter: the
// metastable closure of the transition function of the four-state Gray-code
// comparison FSM.
//
// States (first bit s_1, second bit s_2): 00 = prefixes equal with even
// parity, 11 = prefixes equal with odd parity (remaining bits compare in
// reflected order), 01 = g < h decided, 10 = g > h decided.  Fed input bits
// g_i h_i, the next state is
//     r_1 = s_1 (NOT s_2 + NOT b_1) + NOT s_2 b_1
//     r_2 = s_2 (NOT s_1 + NOT b_2) + NOT s_1 b_2
// These are sums of all prime implicants, so the gate-level circuit computes
// the closure; the operator is associative on {0,1,M}^2 and can therefore be
// evaluated by a parallel prefix tree.  Each output bit is one xmux with the
// input wiring of the paper's xmux table (sel1 = b_i, sel2 = NOT b_i,
// x = NOT s_other, y = s_i).  Inverters are explicit kleene_gate cells.
//
// Interface: s (left operand), b (right operand), r = s <>_M b, all tpair_t.
// Timing: combinational; one inverter level plus one xmux (4 gate levels).
module diamond_m
  import mc_pkg::*;
(
  input  tpair_t s,
  input  tpair_t b,
  output tpair_t r
);

  tern_t ns1, ns2, nb1, nb2;

  kleene_gate #(.OP(K_INV)) u_ns1 (.a(s.b1), .b(K0), .y(ns1));
  kleene_gate #(.OP(K_INV)) u_ns2 (.a(s.b2), .b(K0), .y(ns2));
  kleene_gate #(.OP(K_INV)) u_nb1 (.a(b.b1), .b(K0), .y(nb1));
  kleene_gate #(.OP(K_INV)) u_nb2 (.a(b.b2), .b(K0), .y(nb2));

  xmux u_bit1 (.sel1(b.b1), .sel2(nb1), .x(ns2), .y(s.b1), .o(r.b1));
  xmux u_bit2 (.sel1(b.b2), .sel2(nb2), .x(ns1), .y(s.b2), .o(r.b2));

endmodule
