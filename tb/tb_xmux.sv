// tb_xmux -- exhaustive check of the extended multiplexer on all 3^4 Kleene
// input combinations.  The expected value is the metastable closure of
// o = y(x + sel2) + x sel1, computed by enumerating every resolution of the
// metastable inputs and superposing the Boolean results.  Also checks the
// property that motivates the cell: with x = y stable, any select (even
// both selects metastable) gives that stable value.
module tb_xmux;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  tern_t s1, s2, x, y, o;
  tern_t vals [3] = '{K0, K1, KM};

  xmux dut (.sel1(s1), .sel2(s2), .x(x), .y(y), .o(o));

  function automatic logic bit_of(tern_t t, int r);
    return (t == KM) ? r[0] : (t == K1);
  endfunction

  function automatic tern_t closure(tern_t a1, tern_t a2, tern_t ax, tern_t ay);
    tern_t res = '{1'b0, 1'b0};
    for (int r = 0; r < 16; r++) begin
      logic v1 = bit_of(a1, r), v2 = bit_of(a2, r >> 1);
      logic vx = bit_of(ax, r >> 2), vy = bit_of(ay, r >> 3);
      logic v = (vy & (vx | v2)) | (vx & v1);
      res = sup(res, v);
    end
    return res;
  endfunction

  int consensus = 0;

  initial begin
    for (int i = 0; i < 81; i++) begin
      s1 = vals[i % 3];
      s2 = vals[(i / 3) % 3];
      x  = vals[(i / 9) % 3];
      y  = vals[(i / 27) % 3];
      #1;
      checks++;
      if (o != closure(s1, s2, x, y)) begin
        failures++;
        $display("FAIL sel1=%s sel2=%s x=%s y=%s got %s", t2c(s1), t2c(s2),
                 t2c(x), t2c(y), t2c(o));
      end
      if (x == y && x != KM) begin
        consensus++;
        checks++;
        if (o != x) begin
          failures++;
          $display("FAIL consensus x=y=%s sel=%s%s got %s", t2c(x), t2c(s1),
                   t2c(s2), t2c(o));
        end
      end
    end
    if (consensus == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
