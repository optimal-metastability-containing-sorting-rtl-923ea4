// tb_sort_workloads -- runs the evaluated grid of sorting networks and widths.
//
// The MC sorting networks were evaluated for 4, 7 and 10 inputs (the 10-input
// one in a fewest-comparator and a least-depth version) at widths B = 2, 4,
// 8 and 16.  tb_mc_sort_net already covers every network at B = 4 and the
// depth-optimal 10-sorter at B = 8, and tb_mc_sort_net_full the default
// (depth-optimal 10-sorter, B = 16); this bench builds the remaining ten
// points of the grid: every network at B = 2, and the 4-sort, 7-sort and
// fewest-comparator 10-sort at B = 8 and B = 16.  Each gets 500 vectors of
// random valid strings (one in three metastable, one in five a copy of an
// earlier operand); the outputs must be the inputs sorted ascending by rank
// in the total order of valid strings.  As in tb_mc_sort_net, metastable
// operands, several per vector, ties and metastable ties are counted per
// network and must all occur.
module tb_sort_workloads;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  int done = 0;

  localparam int NCFG = 10;
  localparam sortnet_e CFG_NET [NCFG] = '{NET_SORT4, NET_SORT7, NET_SORT10C,
                                          NET_SORT10D,
                                          NET_SORT4, NET_SORT7, NET_SORT10C,
                                          NET_SORT4, NET_SORT7, NET_SORT10C};
  localparam int CFG_B [NCFG] = '{2, 2, 2, 2, 8, 8, 8, 16, 16, 16};
  localparam int CFG_K [NCFG] = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int B   = CFG_B[c];
    localparam int NIN = net_inputs(CFG_NET[c]);
    tern_t x [NIN][1:B];
    tern_t y [NIN][1:B];

    mc_sort_net #(.NET(CFG_NET[c]), .B(B), .K(CFG_K[c])) dut (.x(x), .y(y));

    initial begin
      tvec_t v [NIN];
      tvec_t s [NIN];
      tvec_t tmp;
      tvec_t o;
      int cnt_meta = 0, cnt_multi = 0, cnt_tie = 0, cnt_tie_meta = 0;
      longint unsigned top = (64'd1 << B) - 1;
      #1;
      for (int it = 0; it < 500; it++) begin
        int nm;
        bit tie, tie_meta;
        nm = 0;
        tie = 0;
        tie_meta = 0;
        for (int n = 0; n < NIN; n++) begin
          longint unsigned xv;
          xv = {$urandom, $urandom} & top;
          if (n > 0 && $urandom_range(4) == 0) v[n] = v[$urandom_range(n - 1)];
          else v[n] = valid(xv, $urandom_range(2) == 0, B);
          for (int i = 1; i <= B; i++) x[n][i] = v[n][i];
        end
        #1;
        // reference: insertion sort by rank
        for (int n = 0; n < NIN; n++) s[n] = v[n];
        for (int a = 1; a < NIN; a++)
          for (int b = a; b > 0 && rank(s[b-1], B) > rank(s[b], B); b--) begin
            tmp = s[b]; s[b] = s[b-1]; s[b-1] = tmp;
          end
        for (int n = 0; n < NIN; n++) begin
          o = s[n];
          for (int i = 1; i <= B; i++) o[i] = y[n][i];
          checks++;
          if (vec2str(o, B) != vec2str(s[n], B)) begin
            failures++;
            $display("FAIL net %0d B=%0d out %0d got %s exp %s", CFG_NET[c], B,
                     n, vec2str(o, B), vec2str(s[n], B));
          end
          if (nmeta(v[n], B) > 0) nm++;
          if (n > 0 && vec2str(s[n], B) == vec2str(s[n-1], B)) begin
            tie = 1;
            if (nmeta(s[n], B) > 0) tie_meta = 1;
          end
        end
        if (nm > 0) cnt_meta++;
        if (nm > 1) cnt_multi++;
        if (tie) cnt_tie++;
        if (tie_meta) cnt_tie_meta++;
      end
      $display("net %0d B=%0d K=%0d: vectors with metastable operand %0d, several %0d, ties %0d, metastable ties %0d",
               CFG_NET[c], B, CFG_K[c], cnt_meta, cnt_multi, cnt_tie, cnt_tie_meta);
      if (cnt_meta == 0 || cnt_multi == 0 || cnt_tie == 0 || cnt_tie_meta == 0) begin
        failures++;
        $display("FAIL coverage for net %0d", CFG_NET[c]);
      end
      done++;
    end
  end

  initial begin
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
