// tb_mc_sort_net_full -- the sorter at its default configuration (10 inputs,
// depth-optimal network, 16-bit strings, K = 0), no parameter overrides.
// Random vectors of valid strings (about a third metastable, with repeated
// operands) must come out sorted ascending in the order of valid strings.
module tb_mc_sort_net_full;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  localparam int B   = 16;
  localparam int NIN = 10;

  int checks = 0, failures = 0;
  tern_t x [NIN][1:B];
  tern_t y [NIN][1:B];

  mc_sort_net dut (.x(x), .y(y));

  initial begin
    tvec_t v [NIN];
    tvec_t s [NIN];
    tvec_t tmp, o;
    int cnt_meta = 0, cnt_tie_meta = 0;
    for (int it = 0; it < 1000; it++) begin
      for (int n = 0; n < NIN; n++) begin
        longint unsigned xv;
        xv = longint'($urandom_range(65535));
        if (n > 0 && $urandom_range(4) == 0) v[n] = v[$urandom_range(n - 1)];
        else v[n] = valid(xv, $urandom_range(2) == 0, B);
        for (int i = 1; i <= B; i++) x[n][i] = v[n][i];
      end
      #1;
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
          $display("FAIL out %0d got %s exp %s", n, vec2str(o, B), vec2str(s[n], B));
        end
        if (nmeta(s[n], B) > 0) cnt_meta++;
        if (n > 0 && nmeta(s[n], B) > 0 && vec2str(s[n], B) == vec2str(s[n-1], B))
          cnt_tie_meta++;
      end
    end
    $display("metastable operands %0d, equal metastable neighbours %0d", cnt_meta,
             cnt_tie_meta);
    if (cnt_meta == 0 || cnt_tie_meta == 0) failures++;
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
