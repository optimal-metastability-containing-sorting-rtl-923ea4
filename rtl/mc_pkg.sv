// mc_pkg -- shared types and Kleene-logic helpers for the metastability-
// containing (MC) sorting circuits.
//
// Every wire of the circuit carries one value of Kleene's three-valued logic:
// a stable 0, a stable 1, or M (metastable / unknown).  A two-state simulator
// cannot show M on a single wire, so each logical wire is represented by two
// rails, "may be 0" and "may be 1":
//     0 -> {may1=0, may0=1}     1 -> {may1=1, may0=0}     M -> {1,1}
// The encoding {0,0} never occurs.  With this encoding the Kleene AND, OR and
// NOT of the paper's gate table become plain Boolean equations on the rails,
// so the model is exact for worst-case metastability propagation (it is the
// metastable closure of each gate) and stays synthesizable.  Mapping every
// tern_t back to one physical wire and every gate function below to one
// standard cell gives the single-rail circuit the construction describes.
//
// A "pair" (tpair_t) is the two-bit string that flows through the prefix
// computation: either an input pair g_i h_i or an FSM state s^(i).
// Comparator lists of the sorting networks also live here, so that the top and
// the testbenches share one definition.
package mc_pkg;

  typedef struct packed {
    logic may1;
    logic may0;
  } tern_t;

  localparam tern_t K0 = '{may1: 1'b0, may0: 1'b1};
  localparam tern_t K1 = '{may1: 1'b1, may0: 1'b0};
  localparam tern_t KM = '{may1: 1'b1, may0: 1'b1};

  // Two-bit Kleene string: first bit b1 (state bit s_1 or input bit g_i),
  // second bit b2 (state bit s_2 or input bit h_i).
  typedef struct packed {
    tern_t b1;
    tern_t b2;
  } tpair_t;

  localparam tpair_t P00 = '{b1: K0, b2: K0};

  // Gate functions selectable in kleene_gate.
  typedef enum logic [2:0] {
    K_INV  = 3'd0,
    K_AND  = 3'd1,
    K_OR   = 3'd2,
    K_NAND = 3'd3,
    K_NOR  = 3'd4
  } kgate_e;

  // Kleene AND: 1 only if both may be 1, 0 as soon as one may be 0.
  function automatic tern_t k_and(tern_t a, tern_t b);
    k_and.may1 = a.may1 & b.may1;
    k_and.may0 = a.may0 | b.may0;
  endfunction

  function automatic tern_t k_or(tern_t a, tern_t b);
    k_or.may1 = a.may1 | b.may1;
    k_or.may0 = a.may0 & b.may0;
  endfunction

  function automatic tern_t k_not(tern_t a);
    k_not.may1 = a.may0;
    k_not.may0 = a.may1;
  endfunction

  function automatic logic k_is_meta(tern_t a);
    return a.may1 & a.may0;
  endfunction

  // ---------------------------------------------------------------------
  // Sorting networks.  A comparator (lo, hi) leaves the smaller string (in
  // the order of valid strings) on channel lo and the larger on channel hi.
  // Comparator counts are those implied by the gate counts reported for the
  // 4-, 7- and 10-input sorters; the lists themselves are standard optimal
  // networks (size-optimal 10-sort: 29 comparators, depth 8; depth-optimal
  // 10-sort: 31 comparators, depth 7), checked with the 0-1 principle.
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {
    NET_SORT4   = 2'd0,
    NET_SORT7   = 2'd1,
    NET_SORT10C = 2'd2,
    NET_SORT10D = 2'd3
  } sortnet_e;


  function automatic int net_inputs(sortnet_e net);
    case (net)
      NET_SORT4: return 4;
      NET_SORT7: return 7;
      default:   return 10;
    endcase
  endfunction

  function automatic int net_comps(sortnet_e net);
    case (net)
      NET_SORT4:   return 5;
      NET_SORT7:   return 16;
      NET_SORT10C: return 29;
      default:     return 31;
    endcase
  endfunction

  // Comparator c of network net, packed as {lo[7:0], hi[7:0]}.
  function automatic logic [15:0] net_comp(sortnet_e net, int c);
    logic [15:0] t4  [5]  = '{16'h0001, 16'h0203, 16'h0002, 16'h0103, 16'h0102};
    logic [15:0] t7  [16] = '{16'h0006, 16'h0203, 16'h0405, 16'h0002, 16'h0104, 16'h0306,
                              16'h0001, 16'h0205, 16'h0304, 16'h0102, 16'h0406, 16'h0203,
                              16'h0405, 16'h0102, 16'h0304, 16'h0506};
    logic [15:0] t10c[29] = '{16'h0008, 16'h0109, 16'h0207, 16'h0305, 16'h0406,
                              16'h0002, 16'h0104, 16'h0508, 16'h0709,
                              16'h0003, 16'h0204, 16'h0507, 16'h0609,
                              16'h0001, 16'h0306, 16'h0809,
                              16'h0105, 16'h0203, 16'h0408, 16'h0607,
                              16'h0102, 16'h0305, 16'h0406, 16'h0708,
                              16'h0203, 16'h0405, 16'h0607,
                              16'h0304, 16'h0506};
    logic [15:0] t10d[31] = '{16'h0001, 16'h0205, 16'h0306, 16'h0407, 16'h0809,
                              16'h0006, 16'h0108, 16'h0204, 16'h0309, 16'h0507,
                              16'h0002, 16'h0103, 16'h0405, 16'h0608, 16'h0709,
                              16'h0001, 16'h0207, 16'h0305, 16'h0406, 16'h0809,
                              16'h0102, 16'h0304, 16'h0506, 16'h0708,
                              16'h0103, 16'h0204, 16'h0507, 16'h0608,
                              16'h0203, 16'h0405, 16'h0607};
    case (net)
      NET_SORT4:   return t4[c];
      NET_SORT7:   return t7[c];
      NET_SORT10C: return t10c[c];
      default:     return t10d[c];
    endcase
  endfunction

  // ceil(log2(n)) for n >= 1.
  function automatic int clog2(int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

endpackage
