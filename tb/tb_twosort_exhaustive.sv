// tb_twosort_exhaustive -- exhaustive check of the MC 2-sort over all
// valid input pairs, for every choice of the recursion split K.
//
// The design is meant to be correct for every B and every K in
// 0..ceil(log2(B-1)); the size/depth trade-off chosen by K must never change
// the function.  This bench drives the same operands into one instance per K
// and compares each against the metastable closure of Gray-code max/min,
// computed by enumerating all resolutions of the metastable bits.
//
//  * B = 8, K = 0, 1, 2, 3: all 511 x 511 pairs of valid strings
//    (261 121 pairs, each checked on 4 instances).
//  * B = 10, K = 0 .. 4: all 2047 x 2047 pairs of valid strings.
//  * B = 12, K = 0 .. 4: 200 000 random pairs, half of the operands
//    metastable, one in five a forced tie, one in seven neighbours.
//    (All 8191 x 8191 pairs at B = 12 would take too long to simulate.)
// Combinational design: inputs are applied, outputs sampled after #1.
module tb_twosort_exhaustive;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  int n_meta = 0, n_both_meta = 0, n_tie = 0;

  localparam int B8 = 8;
  localparam int NK8 = 4;
  localparam int B10 = 10;
  localparam int NK10 = 5;
  localparam int B12 = 12;
  localparam int NK12 = 5;

  tern_t g8 [1:B8], h8 [1:B8];
  tern_t g10 [1:B10], h10 [1:B10];
  tern_t g12 [1:B12], h12 [1:B12];
  tern_t mx8 [NK8][1:B8], mn8 [NK8][1:B8];
  tern_t mx10 [NK10][1:B10], mn10 [NK10][1:B10];
  tern_t mx12 [NK12][1:B12], mn12 [NK12][1:B12];

  for (genvar k = 0; k < NK8; k++) begin : g_k8
    twosort #(.B(B8), .K(k)) dut (.g(g8), .h(h8), .gmax(mx8[k]), .hmin(mn8[k]));
  end
  for (genvar k = 0; k < NK10; k++) begin : g_k10
    twosort #(.B(B10), .K(k)) dut (.g(g10), .h(h10), .gmax(mx10[k]), .hmin(mn10[k]));
  end
  for (genvar k = 0; k < NK12; k++) begin : g_k12
    twosort #(.B(B12), .K(k)) dut (.g(g12), .h(h12), .gmax(mx12[k]), .hmin(mn12[k]));
  end

  function automatic void tally(tvec_t g, tvec_t h, int b);
    if (nmeta(g, b) + nmeta(h, b) > 0) n_meta++;
    if (nmeta(g, b) > 0 && nmeta(h, b) > 0) n_both_meta++;
    if (rank(g, b) == rank(h, b)) n_tie++;
  endfunction

  task automatic run8(tvec_t vg, tvec_t vh);
    tvec_t emx, emn;
    for (int i = 1; i <= B8; i++) begin g8[i] = vg[i]; h8[i] = vh[i]; end
    #1;
    closure_maxmin(vg, vh, B8, emx, emn);
    for (int k = 0; k < NK8; k++) begin
      bit bad = 0;
      for (int i = 1; i <= B8; i++)
        if (mx8[k][i] != emx[i] || mn8[k][i] != emn[i]) bad = 1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10)
          $display("FAIL B=8 K=%0d g=%s h=%s exp %s/%s", k, vec2str(vg, B8),
                   vec2str(vh, B8), vec2str(emx, B8), vec2str(emn, B8));
      end
    end
    tally(vg, vh, B8);
  endtask

  task automatic run10(tvec_t vg, tvec_t vh);
    tvec_t emx, emn;
    for (int i = 1; i <= B10; i++) begin g10[i] = vg[i]; h10[i] = vh[i]; end
    #1;
    closure_maxmin(vg, vh, B10, emx, emn);
    for (int k = 0; k < NK10; k++) begin
      bit bad = 0;
      for (int i = 1; i <= B10; i++)
        if (mx10[k][i] != emx[i] || mn10[k][i] != emn[i]) bad = 1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10)
          $display("FAIL B=10 K=%0d g=%s h=%s exp %s/%s", k, vec2str(vg, B10),
                   vec2str(vh, B10), vec2str(emx, B10), vec2str(emn, B10));
      end
    end
    tally(vg, vh, B10);
  endtask

  task automatic run12(tvec_t vg, tvec_t vh);
    tvec_t emx, emn;
    for (int i = 1; i <= B12; i++) begin g12[i] = vg[i]; h12[i] = vh[i]; end
    #1;
    closure_maxmin(vg, vh, B12, emx, emn);
    for (int k = 0; k < NK12; k++) begin
      bit bad = 0;
      for (int i = 1; i <= B12; i++)
        if (mx12[k][i] != emx[i] || mn12[k][i] != emn[i]) bad = 1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10)
          $display("FAIL B=12 K=%0d g=%s h=%s exp %s/%s", k, vec2str(vg, B12),
                   vec2str(vh, B12), vec2str(emx, B12), vec2str(emn, B12));
      end
    end
    tally(vg, vh, B12);
  endtask

  initial begin
    tvec_t vg, vh;
    longint unsigned xg, xh;
    longint unsigned top12;
    top12 = (64'd1 << B12) - 1;
    for (int i = 1; i <= B12; i++) begin g12[i] = K0; h12[i] = K0; end
    for (int i = 1; i <= B10; i++) begin g10[i] = K0; h10[i] = K0; end
    // B = 8: valid string number n is rg(n/2) for even n and
    // rg(n/2) * rg(n/2 + 1) for odd n, n = 0 .. 510.
    for (int x = 0; x < 511; x++)
      for (int y = 0; y < 511; y++) begin
        vg = valid(longint'(x) / 2, bit'(x & 1), B8);
        vh = valid(longint'(y) / 2, bit'(y & 1), B8);
        run8(vg, vh);
      end
    // B = 10: the same enumeration, n = 0 .. 2046.
    for (int x = 0; x < 2047; x++)
      for (int y = 0; y < 2047; y++) begin
        vg = valid(longint'(x) / 2, bit'(x & 1), B10);
        vh = valid(longint'(y) / 2, bit'(y & 1), B10);
        run10(vg, vh);
      end
    // B = 12: random sample.
    for (int it = 0; it < 200000; it++) begin
      xg = {$urandom, $urandom} & top12;
      xh = {$urandom, $urandom} & top12;
      if (it % 5 == 0) xh = xg;
      if (it % 7 == 0) xh = (xg == top12) ? xg : xg + 1;
      vg = valid(xg, $urandom_range(1) == 0, B12);
      vh = valid(xh, $urandom_range(1) == 0, B12);
      if (it % 5 == 0) vh = vg;
      run12(vg, vh);
    end
    $display("coverage: metastable operand %0d, both metastable %0d, ties %0d",
             n_meta, n_both_meta, n_tie);
    if (n_meta == 0 || n_both_meta == 0 || n_tie == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
