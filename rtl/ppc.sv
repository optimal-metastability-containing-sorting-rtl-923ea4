// ppc -- parallel prefix computation PPC_<>M(N) over the MC comparison
// operator: p[i] = d[0] <>_M d[1] <>_M ... <>_M d[i] for every i < N.
// (Array index i holds the paper's d_{i+1} and pi_{i+1}.)
//
// The circuit is the recursive Ladner-Fischer family with the unbalanced split
// of the construction this RTL follows:
//
//  * "left pattern" (used for the first K levels, and once inside every
//    depth-optimal step): combine neighbours d_{2i-1} <> d_{2i}, solve the
//    half-size problem recursively, then
//      pi_1 = d_1, pi_{2i} = P_i, pi_{2i+1} = P_i <> d_{2i+1};
//    for odd N the last input goes to the sub-problem alone and its last
//    output is pi_N directly.  Costs two operator levels per step.
//  * "right pattern" (K = 0, N >= 3): split at H = 2^(ceil(log2 N) - 1) so the
//    left part is a complete power of two; the left part is one left-pattern
//    step around a depth-optimal PPC(H/2), the right part is a depth-optimal
//    PPC(N-H), and every right output is combined with the left part's last
//    output: pi_{H+i} = pi_H <> pi'_i.  Costs one operator level.
//  * N = 1 is a wire, N = 2 a single operator.
//
// For N = 2^b and K = 0 this is ppc(C, T_b), with depth b operators and
// 2^(b+2) - F_(b+5) + 1 operators (F = Fibonacci numbers); in general depth is
// ceil(log2 N) + K operators.  K = 0 is the variant that was laid out and is
// the default here.  The recursion, the split rule and the pattern choice are
// the paper's; the module itself applies no fan-out limiting (the last output
// of a left part drives up to N/2 operators).
//
// Interface: d[N] in, p[N] out, tpair_t each.  Timing: combinational.
//
// Lint note: when this module is linted on its own as the top of a design,
// the lint tool reports dl/dr unused and pl/pr undriven in g_right.  That is
// an artefact of a self-instantiating module being the top: the same netlist
// lints clean when ppc sits under twosort, and the standalone bench drives
// every output of ppc at the top level and checks it.  Passing array slices
// straight to the sub-instances instead of the four helper arrays does not
// remove the report and adds a false loop warning, so the helper arrays stay.
module ppc
  import mc_pkg::*;
#(
  parameter int N = 15,
  parameter int K = 0
) (
  input  tpair_t d [N],
  output tpair_t p [N]
);

  if (N == 1) begin : g_wire
    assign p[0] = d[0];
  end else if (N == 2) begin : g_one
    assign p[0] = d[0];
    diamond_m u_op (.s(d[0]), .b(d[1]), .r(p[1]));
  end else if (K > 0) begin : g_left
    localparam int M  = (N + 1) / 2;   // inputs of the half-size problem
    localparam int NP = N / 2;         // neighbour pairs
    tpair_t cin  [M];
    tpair_t cout [M];

    for (genvar i = 0; i < NP; i++) begin : g_pair
      diamond_m u_op (.s(d[2*i]), .b(d[2*i+1]), .r(cin[i]));
    end
    if (N % 2 == 1) begin : g_odd_in
      assign cin[M-1] = d[N-1];
    end

    ppc #(.N(M), .K(K - 1)) u_sub (.d(cin), .p(cout));

    assign p[0] = d[0];
    for (genvar i = 0; i < NP; i++) begin : g_even_out
      assign p[2*i+1] = cout[i];
    end
    for (genvar i = 1; 2*i < N; i++) begin : g_odd_out
      if (2*i == N - 1) begin : g_last
        assign p[2*i] = cout[M-1];
      end else begin : g_op
        diamond_m u_op (.s(cout[i-1]), .b(d[2*i]), .r(p[2*i]));
      end
    end
  end else begin : g_right
    localparam int H = 1 << (clog2(N) - 1);  // complete left part
    localparam int R = N - H;
    tpair_t dl [H];
    tpair_t dr [R];
    tpair_t pl [H];
    tpair_t pr [R];

    for (genvar i = 0; i < H; i++) begin : g_lin
      assign dl[i] = d[i];
      assign p[i]  = pl[i];
    end
    for (genvar i = 0; i < R; i++) begin : g_rin
      assign dr[i] = d[H+i];
    end

    ppc #(.N(H), .K(1)) u_left  (.d(dl), .p(pl));
    ppc #(.N(R), .K(0)) u_right (.d(dr), .p(pr));

    for (genvar i = 0; i < R; i++) begin : g_comb
      diamond_m u_op (.s(pl[H-1]), .b(pr[i]), .r(p[H+i]));
    end
  end

endmodule
