// mc_tb_pkg -- reference model shared by the testbenches of the MC sorter.
//
// Everything here is computed from the definitions, not from the circuit:
// binary-reflected Gray code, valid strings (a codeword, or two consecutive
// codewords superposed), their total order, and the metastable closure of
// max/min obtained by enumerating all resolutions of the metastable bits.
// Strings are held in tvec_t with bit 1 the most significant; only bits
// 1..b are used.
package mc_tb_pkg;
  import mc_pkg::*;

  localparam int MAXB = 32;
  typedef tern_t tvec_t [1:MAXB];

  function automatic byte t2c(tern_t t);
    if (t == K0) return "0";
    if (t == K1) return "1";
    if (t == KM) return "M";
    return "?";
  endfunction

  function automatic tern_t c2t(byte c);
    if (c == "0") return K0;
    if (c == "1") return K1;
    return KM;
  endfunction

  function automatic string vec2str(tvec_t v, int b);
    string s = "";
    for (int i = 1; i <= b; i++) s = {s, string'(t2c(v[i]))};
    return s;
  endfunction

  function automatic tvec_t str2vec(string s);
    tvec_t v;
    for (int i = 1; i <= MAXB; i++) v[i] = K0;
    for (int i = 1; i <= s.len(); i++) v[i] = c2t(s[i-1]);
    return v;
  endfunction

  // b-bit reflected Gray code of x, written MSB first (bit 1).
  function automatic tvec_t gray(longint unsigned x, int b);
    tvec_t v;
    longint unsigned gc = x ^ (x >> 1);
    for (int i = 1; i <= MAXB; i++) v[i] = K0;
    for (int i = 1; i <= b; i++) v[i] = gc[b-i] ? K1 : K0;
    return v;
  endfunction

  // Decode a stable Gray string (prefix XOR).
  function automatic longint unsigned gdecode(tvec_t v, int b);
    longint unsigned x = 0;
    logic acc = 1'b0;
    for (int i = 1; i <= b; i++) begin
      acc = acc ^ (v[i] == K1);
      x = (x << 1) | longint'(acc);
    end
    return x;
  endfunction

  // Superposition x * y, bit-wise.
  function automatic tvec_t star(tvec_t a, tvec_t c, int b);
    tvec_t v = a;
    for (int i = 1; i <= b; i++) if (a[i] != c[i]) v[i] = KM;
    return v;
  endfunction

  // A valid string: rg(x) if meta = 0 (or x is the last codeword),
  // rg(x) * rg(x+1) otherwise.
  function automatic tvec_t valid(longint unsigned x, bit meta, int b);
    if (!meta || x == (64'd1 << b) - 1) return gray(x, b);
    return star(gray(x, b), gray(x + 1, b), b);
  endfunction

  function automatic int nmeta(tvec_t v, int b);
    int n = 0;
    for (int i = 1; i <= b; i++) if (v[i] == KM) n++;
    return n;
  endfunction

  // Resolution r (bit j of r replaces the j-th metastable bit).
  function automatic tvec_t resolve(tvec_t v, int b, int r);
    tvec_t o = v;
    int j = 0;
    for (int i = 1; i <= b; i++)
      if (v[i] == KM) begin
        o[i] = r[j] ? K1 : K0;
        j++;
      end
    return o;
  endfunction

  // Position in the total order of valid strings:
  // rank(rg(x)) = 2x, rank(rg(x)*rg(x+1)) = 2x+1.
  function automatic longint unsigned rank(tvec_t v, int b);
    if (nmeta(v, b) == 0) return 2 * gdecode(v, b);
    begin
      longint unsigned a = gdecode(resolve(v, b, 0), b);
      longint unsigned c = gdecode(resolve(v, b, 1), b);
      return 2 * (a < c ? a : c) + 1;
    end
  endfunction

  // Metastable closure of (max, min) by enumerating resolutions.
  function automatic void closure_maxmin(tvec_t g, tvec_t h, int b,
                                         output tvec_t mx, output tvec_t mn);
    int ng = nmeta(g, b), nh = nmeta(h, b);
    bit first = 1;
    for (int rg = 0; rg < (1 << ng); rg++)
      for (int rh = 0; rh < (1 << nh); rh++) begin
        tvec_t gg = resolve(g, b, rg);
        tvec_t hh = resolve(h, b, rh);
        tvec_t a, c;
        if (gdecode(gg, b) >= gdecode(hh, b)) begin a = gg; c = hh; end
        else begin a = hh; c = gg; end
        if (first) begin mx = a; mn = c; first = 0; end
        else begin mx = star(mx, a, b); mn = star(mn, c, b); end
      end
  endfunction

  // Boolean FSM transition and output operators (the plain, non-metastable
  // comparison FSM), used to build closures independently of the RTL.
  function automatic logic [1:0] fsm_next(logic [1:0] s, logic [1:0] in);
    case (s)
      2'b00: return in;
      2'b11: return (in == 2'b00) ? 2'b11 : (in == 2'b11) ? 2'b00 :
                    (in == 2'b01) ? 2'b10 : 2'b01;
      default: return s;
    endcase
  endfunction

  function automatic logic [1:0] fsm_out(logic [1:0] s, logic [1:0] in);
    logic mx = in[1] | in[0], mn = in[1] & in[0];
    case (s)
      2'b00: return {mx, mn};
      2'b11: return {mn, mx};
      2'b10: return in;
      default: return {in[0], in[1]};
    endcase
  endfunction

  function automatic tern_t sup(tern_t a, logic v);
    return '{may1: a.may1 | v, may0: a.may0 | ~v};
  endfunction

  function automatic logic [1:0] ternbits(tpair_t p, int r);
    // r enumerates resolutions: bit0 for b1, bit1 for b2 (used only if M)
    logic x1 = (p.b1 == KM) ? r[0] : (p.b1 == K1);
    logic x2 = (p.b2 == KM) ? r[1] : (p.b2 == K1);
    return {x1, x2};
  endfunction

  // Closure of fsm_next (sel = 0) or fsm_out (sel = 1) on Kleene pairs.
  function automatic tpair_t closure_op(tpair_t s, tpair_t in, bit sel);
    tpair_t o = '{b1: '{1'b0, 1'b0}, b2: '{1'b0, 1'b0}};
    for (int rs = 0; rs < 4; rs++)
      for (int ri = 0; ri < 4; ri++) begin
        logic [1:0] v = sel ? fsm_out(ternbits(s, rs), ternbits(in, ri))
                            : fsm_next(ternbits(s, rs), ternbits(in, ri));
        o.b1 = sup(o.b1, v[1]);
        o.b2 = sup(o.b2, v[0]);
      end
    return o;
  endfunction

  function automatic tpair_t str2pair(string s);
    return '{b1: c2t(s[0]), b2: c2t(s[1])};
  endfunction

  function automatic string pair2str(tpair_t p);
    return {string'(t2c(p.b1)), string'(t2c(p.b2))};
  endfunction

  // All nine Kleene pairs, in the column order of the operator tables.
  function automatic tpair_t pair_n(int n);
    string names [9] = '{"00", "0M", "01", "M1", "11", "1M", "10", "M0", "MM"};
    return str2pair(names[n]);
  endfunction

endpackage
