// twosort -- metastability-containing 2-sort(B): given two valid B-bit
// binary-reflected Gray-code strings g and h (each either a codeword or two
// consecutive codewords superposed, i.e. at most one metastable bit M), it
// returns g' = max_M{g,h} and h' = min_M{g,h}, the maximum and minimum in the
// order  rg(x) < rg(x)*rg(x+1) < rg(x+1).  Metastability in the inputs never
// spreads beyond what any resolution of it would imply.
//
// How it works: the pairs g_i h_i (i = 1..B, bit 1 is the most significant)
// are fed to a parallel prefix computation over <>_M, which yields the
// comparison state s^(i) of every prefix; with s^(0) = 00, output bit i is
// out_M(s^(i-1), g_i h_i).  Only B-1 prefixes are needed.  The composition
// (PPC(B-1) plus B out_M cells) is the paper's; K selects the size/depth
// trade-off of the prefix tree (K = 0: depth ceil(log2(B-1)) operators).
//
// Interface: g[1:B], h[1:B] in; gmax[1:B] (= g'), hmin[1:B] (= h') out.
// Timing: combinational; depth (ceil(log2(B-1)) + K) diamond_m cells plus
// one out_m cell.
module twosort
  import mc_pkg::*;
#(
  parameter int B = 16,
  parameter int K = 0
) (
  input  tern_t g    [1:B],
  input  tern_t h    [1:B],
  output tern_t gmax [1:B],
  output tern_t hmin [1:B]
);

  tpair_t bits  [1:B];
  tpair_t state [0:B-1];   // state[i] = s^(i)
  tpair_t outp  [1:B];

  for (genvar i = 1; i <= B; i++) begin : g_bits
    assign bits[i] = '{b1: g[i], b2: h[i]};
  end

  assign state[0] = P00;

  if (B > 1) begin : g_ppc
    tpair_t pin  [B-1];
    tpair_t pout [B-1];
    for (genvar i = 0; i < B - 1; i++) begin : g_wire
      assign pin[i]     = bits[i+1];
      assign state[i+1] = pout[i];
    end
    ppc #(.N(B - 1), .K(K)) u_ppc (.d(pin), .p(pout));
  end

  for (genvar i = 1; i <= B; i++) begin : g_out
    out_m u_out (.s(state[i-1]), .b(bits[i]), .o(outp[i]));
    assign gmax[i] = outp[i].b1;
    assign hmin[i] = outp[i].b2;
  end

endmodule
