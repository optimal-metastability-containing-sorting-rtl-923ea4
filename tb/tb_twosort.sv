// tb_twosort -- checks the MC 2-sort against the definition.
//
//  * B = 4: all 31 x 31 pairs of valid strings (exhaustive), including the
//    vectors of the published 4-bit waveform and of the 0M10 / 0010 example.
//  * B = 9: the published 9-bit example (g = 101010110, h = 101M10000).
//  * B = 12 with K = 1 and B = 16 (default) with K = 0: random valid strings,
//    one in three of them metastable, with forced ties.
// Expected outputs come from the metastable closure of Gray-code max/min
// (all resolutions enumerated) and, independently, from the total order of
// valid strings: max must be the operand of higher rank.
module tb_twosort;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  int n_meta = 0, n_tie_meta = 0;
  int done = 0;

  localparam int NCFG = 3;
  localparam int CFG_B [NCFG] = '{4, 12, 16};
  localparam int CFG_K [NCFG] = '{0, 1, 0};

  task automatic compare(string tag, int b, tvec_t g, tvec_t h, tvec_t gm,
                         tvec_t hm);
    tvec_t emx, emn;
    closure_maxmin(g, h, b, emx, emn);
    checks++;
    if (vec2str(gm, b) != vec2str(emx, b) || vec2str(hm, b) != vec2str(emn, b)) begin
      failures++;
      $display("FAIL %s g=%s h=%s got %s/%s exp %s/%s", tag, vec2str(g, b),
               vec2str(h, b), vec2str(gm, b), vec2str(hm, b), vec2str(emx, b),
               vec2str(emn, b));
    end
    checks++;
    if (vec2str(gm, b) != vec2str((rank(g, b) >= rank(h, b)) ? g : h, b)) begin
      failures++;
      $display("FAIL order %s g=%s h=%s max %s", tag, vec2str(g, b),
               vec2str(h, b), vec2str(gm, b));
    end
    if (nmeta(g, b) + nmeta(h, b) > 0) n_meta++;
    if (nmeta(g, b) > 0 && vec2str(g, b) == vec2str(h, b)) n_tie_meta++;
  endtask

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int B = CFG_B[c];
    tern_t g [1:B], h [1:B], gm [1:B], hm [1:B];

    twosort #(.B(B), .K(CFG_K[c])) dut (.g(g), .h(h), .gmax(gm), .hmin(hm));

    task automatic apply(tvec_t vg, tvec_t vh, output tvec_t om, output tvec_t on);
      for (int i = 1; i <= B; i++) begin
        g[i] = vg[i];
        h[i] = vh[i];
      end
      #1;
      om = vg; on = vh;
      for (int i = 1; i <= B; i++) begin
        om[i] = gm[i];
        on[i] = hm[i];
      end
    endtask

    initial begin
      tvec_t vg, vh, om, on;
      longint unsigned top = (64'd1 << B) - 1;
      #1;
      if (B == 4) begin
        for (int x = 0; x < 31; x++)
          for (int y = 0; y < 31; y++) begin
            vg = valid(longint'(x / 2), x % 2, B);
            vh = valid(longint'(y / 2), y % 2, B);
            apply(vg, vh, om, on);
            compare("exh4", B, vg, vh, om, on);
          end
      end else begin
        for (int it = 0; it < 3000; it++) begin
          longint unsigned xg, xh;
          xg = {$urandom, $urandom} & top;
          xh = (it % 5 == 0) ? xg : ({$urandom, $urandom} & top);
          if (it % 7 == 0) xh = (xg == top) ? xg : xg + 1;
          vg = valid(xg, $urandom_range(2) == 0, B);
          vh = valid(xh, (it % 5 == 0) ? (nmeta(vg, B) > 0) : ($urandom_range(2) == 0), B);
          apply(vg, vh, om, on);
          compare("rand", B, vg, vh, om, on);
        end
      end
      done++;
    end
  end

  // Published examples.
  tern_t g4 [1:4], h4 [1:4], gm4 [1:4], hm4 [1:4];
  tern_t g9 [1:9], h9 [1:9], gm9 [1:9], hm9 [1:9];
  twosort #(.B(4)) u_ex4 (.g(g4), .h(h4), .gmax(gm4), .hmin(hm4));
  twosort #(.B(9)) u_ex9 (.g(g9), .h(h9), .gmax(gm9), .hmin(hm9));

  task automatic directed4(string sg, string sh, string smax, string smin);
    tvec_t vg = str2vec(sg), vh = str2vec(sh), om, on;
    for (int i = 1; i <= 4; i++) begin g4[i] = vg[i]; h4[i] = vh[i]; end
    #1;
    om = vg; on = vh;
    for (int i = 1; i <= 4; i++) begin om[i] = gm4[i]; on[i] = hm4[i]; end
    checks++;
    if (vec2str(om, 4) != smax || vec2str(on, 4) != smin) begin
      failures++;
      $display("FAIL example g=%s h=%s got %s/%s exp %s/%s", sg, sh,
               vec2str(om, 4), vec2str(on, 4), smax, smin);
    end
  endtask

  initial begin
    tvec_t vg, vh, om, on;
    #2;
    // 4-bit waveform excerpt: g, h -> max, min of the containing design
    directed4("010M", "0101", "010M", "0101");
    directed4("0M10", "0011", "0M10", "0011");
    directed4("01M1", "010M", "010M", "01M1");
    directed4("1011", "00M1", "1011", "00M1");
    // example showing that the last state alone is not enough
    directed4("0M10", "0010", "0M10", "0010");
    // 9-bit example run
    vg = str2vec("101010110");
    vh = str2vec("101M10000");
    for (int i = 1; i <= 9; i++) begin g9[i] = vg[i]; h9[i] = vh[i]; end
    #1;
    om = vg; on = vh;
    for (int i = 1; i <= 9; i++) begin om[i] = gm9[i]; on[i] = hm9[i]; end
    checks++;
    if (vec2str(om, 9) != "101M10000" || vec2str(on, 9) != "101010110") begin
      failures++;
      $display("FAIL 9-bit example got %s/%s", vec2str(om, 9), vec2str(on, 9));
    end
    wait (done == NCFG);
    if (n_meta == 0 || n_tie_meta == 0) begin
      failures++;
      $display("FAIL coverage: metastable inputs %0d, equal metastable inputs %0d",
               n_meta, n_tie_meta);
    end
    $display("coverage: metastable operands %0d, equal metastable operands %0d",
             n_meta, n_tie_meta);
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
