// tb_kleene_gate -- exhaustive check of the five gate types on {0,1,M}
// against the Kleene truth tables (AND, OR, inverter; NAND and NOR as their
// complements), written out here as literal strings indexed [b*3 + a].
module tb_kleene_gate;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  tern_t a, b;
  tern_t y_inv, y_and, y_or, y_nand, y_nor;
  tern_t vals [3] = '{K0, K1, KM};

  kleene_gate #(.OP(K_INV))  u_inv  (.a(a), .b(b), .y(y_inv));
  kleene_gate #(.OP(K_AND))  u_and  (.a(a), .b(b), .y(y_and));
  kleene_gate #(.OP(K_OR))   u_or   (.a(a), .b(b), .y(y_or));
  kleene_gate #(.OP(K_NAND)) u_nand (.a(a), .b(b), .y(y_nand));
  kleene_gate #(.OP(K_NOR))  u_nor  (.a(a), .b(b), .y(y_nor));

  task automatic check(string name, tern_t got, byte exp);
    checks++;
    if (t2c(got) != exp) begin
      failures++;
      $display("FAIL %s a=%s b=%s got %s exp %s", name, t2c(a), t2c(b),
               t2c(got), exp);
    end
  endtask

  initial begin
    string t_and  = "00001M0MM";
    string t_or   = "01M111M1M";
    string t_nand = "11110M1MM";
    string t_nor  = "10M000M0M";
    string t_inv  = "10M";
    for (int ib = 0; ib < 3; ib++)
      for (int ia = 0; ia < 3; ia++) begin
        a = vals[ia];
        b = vals[ib];
        #1;
        check("AND",  y_and,  t_and[ib*3+ia]);
        check("OR",   y_or,   t_or[ib*3+ia]);
        check("NAND", y_nand, t_nand[ib*3+ia]);
        check("NOR",  y_nor,  t_nor[ib*3+ia]);
        check("INV",  y_inv,  t_inv[ia]);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
