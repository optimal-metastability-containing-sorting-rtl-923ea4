// tb_ppc -- checks the parallel prefix computation for many sizes and both
// pattern mixes.  Every configuration below (N inputs, K leading
// size-optimising steps) gets random operands drawn from all nine Kleene
// pairs; each output p[i] must equal the left-to-right fold
// d[0] <> d[1] <> ... <> d[i], where <> is the closure of the Boolean FSM
// transition computed in the reference package (valid because the closure is
// associative).  A directed test replays the 9-bit example run of the
// comparison FSM (g = 101010110, h = 101M10000) on PPC(8) and checks the
// published intermediate states.
module tb_ppc;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  localparam int NCFG = 14;
  localparam int CFG_N [NCFG] = '{1, 2, 3, 4, 5, 7, 8, 9, 12, 15, 16, 8, 12, 16};
  localparam int CFG_K [NCFG] = '{0, 0, 0, 0, 0, 0, 0, 0, 0,  0,  0,  1, 2,  4};
  localparam int ITER = 400;

  int checks = 0, failures = 0;
  int done = 0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int N = CFG_N[c];
    tpair_t d [N];
    tpair_t p [N];

    ppc #(.N(N), .K(CFG_K[c])) dut (.d(d), .p(p));

    initial begin
      tpair_t acc;
      #1;
      for (int it = 0; it < ITER; it++) begin
        for (int i = 0; i < N; i++) begin
          // bias towards stable pairs so that long prefixes stay informative
          if ($urandom_range(3) == 0) d[i] = pair_n($urandom_range(8));
          else d[i] = pair_n(2 * $urandom_range(3));
        end
        #1;
        acc = d[0];
        for (int i = 0; i < N; i++) begin
          if (i > 0) acc = closure_op(acc, d[i], 1'b0);
          checks++;
          if (p[i] != acc) begin
            failures++;
            $display("FAIL N=%0d K=%0d i=%0d got %s exp %s", N, CFG_K[c], i,
                     pair2str(p[i]), pair2str(acc));
          end
        end
      end
      done++;
    end
  end

  // Directed example: inputs g_i h_i for i = 1..8, expected s^(1..8).
  tpair_t ed [8];
  tpair_t ep [8];
  ppc #(.N(8), .K(0)) u_example (.d(ed), .p(ep));

  initial begin
    string ins [8]  = '{"11", "00", "11", "0M", "11", "00", "10", "10"};
    string outs [8] = '{"11", "11", "00", "0M", "M1", "M1", "01", "01"};
    for (int i = 0; i < 8; i++) ed[i] = str2pair(ins[i]);
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (pair2str(ep[i]) != outs[i]) begin
        failures++;
        $display("FAIL example s(%0d) got %s exp %s", i + 1, pair2str(ep[i]),
                 outs[i]);
      end
    end
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
