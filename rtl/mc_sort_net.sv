// mc_sort_net -- metastability-containing sorting network: sorts NIN valid
// Gray-code strings of B bits each (ascending in the order of valid strings)
// by a fixed network of twosort comparators.
//
// Because each twosort is exactly max/min in a total order on valid strings,
// the 0-1 principle applies and any sorting network with twosort in place of
// its comparators sorts valid strings, metastable ones included.  The four
// networks of the evaluation are selectable: NET_SORT4 (5 comparators, depth
// 3), NET_SORT7 (16, depth 6), NET_SORT10C (29, depth 8, fewest comparators)
// and NET_SORT10D (31, depth 7, least depth).  The comparator lists are
// standard optimal networks (listed in mc_pkg), not taken from the paper,
// which only cites them; the comparator counts agree with its gate counts.
// Comparator c reads the vector left by comparator c-1 and passes the
// channels it does not touch straight through.  The default (10 inputs, depth-optimal network, B = 16)
// is the largest configuration evaluated.
//
// Interface: x[NIN][1:B] unsorted strings, y[NIN][1:B] sorted, y[0] smallest.
// Timing: combinational; depth = network depth times twosort depth.
module mc_sort_net
  import mc_pkg::*;
#(
  parameter sortnet_e NET = NET_SORT10D,
  parameter int       B   = 16,
  parameter int       K   = 0,
  localparam int      NIN = net_inputs(NET),
  localparam int      NC  = net_comps(NET)
) (
  input  tern_t x [NIN][1:B],
  output tern_t y [NIN][1:B]
);

  // Stage c is the vector after comparator c; each stage is its own array so
  // that no array is both read and written by the same comparator.
  for (genvar c = 0; c < NC; c++) begin : g_comp
    localparam logic [15:0] CMP = net_comp(NET, c);
    localparam int LO = int'(CMP[15:8]);
    localparam int HI = int'(CMP[7:0]);
    tern_t si [NIN][1:B];
    tern_t so [NIN][1:B];

    if (c == 0) begin : g_first
      assign si = x;
    end else begin : g_next
      assign si = g_comp[c-1].so;
    end

    twosort #(.B(B), .K(K)) u_sort (
      .g   (si[LO]),
      .h   (si[HI]),
      .gmax(so[HI]),
      .hmin(so[LO])
    );

    for (genvar n = 0; n < NIN; n++) begin : g_pass
      if (n != LO && n != HI) begin : g_wire
        assign so[n] = si[n];
      end
    end
  end

  assign y = g_comp[NC-1].so;

endmodule
