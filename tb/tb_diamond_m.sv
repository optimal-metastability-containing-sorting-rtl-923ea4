// tb_diamond_m -- exhaustive check of the closure of the FSM transition
// operator.  For each of the 9 x 9 Kleene operand pairs the output is
// compared with (a) the published truth table of the closure, pasted below
// row by row (row = left operand / state, column = right operand / input,
// both in the order 00 0M 01 M1 11 1M 10 M0 MM), and (b) the closure of the
// Boolean transition function computed by enumerating resolutions.  Then
// associativity is checked on all 729 triples with three chained instances.
module tb_diamond_m;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  tpair_t s, b, r;
  tpair_t x, y, z, xy, xy_z, yz, x_yz;

  diamond_m dut (.s(s), .b(b), .r(r));
  diamond_m u_xy  (.s(x),  .b(y),  .r(xy));
  diamond_m u_xyz (.s(xy), .b(z),  .r(xy_z));
  diamond_m u_yz  (.s(y),  .b(z),  .r(yz));
  diamond_m u_xyz2(.s(x),  .b(yz), .r(x_yz));

  string table_rows [9] = '{
    "00 0M 01 M1 11 1M 10 M0 MM",
    "0M 0M 01 M1 M1 MM MM MM MM",
    "01 01 01 01 01 01 01 01 01",
    "M1 MM MM MM 0M 0M 01 M1 MM",
    "11 1M 10 M0 00 0M 01 M1 MM",
    "1M 1M 10 M0 M0 MM MM MM MM",
    "10 10 10 10 10 10 10 10 10",
    "M0 MM MM MM 1M 1M 10 M0 MM",
    "MM MM MM MM MM MM MM MM MM"};

  initial begin
    for (int i = 0; i < 9; i++)
      for (int j = 0; j < 9; j++) begin
        string exp;
        exp = table_rows[i].substr(3*j, 3*j+1);
        s = pair_n(i);
        b = pair_n(j);
        #1;
        checks++;
        if (pair2str(r) != exp) begin
          failures++;
          $display("FAIL table %s <> %s = %s, expected %s", pair2str(s),
                   pair2str(b), pair2str(r), exp);
        end
        checks++;
        if (r != closure_op(s, b, 1'b0)) begin
          failures++;
          $display("FAIL closure %s <> %s = %s", pair2str(s), pair2str(b),
                   pair2str(r));
        end
      end
    for (int i = 0; i < 729; i++) begin
      x = pair_n(i % 9);
      y = pair_n((i / 9) % 9);
      z = pair_n(i / 81);
      #1;
      checks++;
      if (xy_z != x_yz) begin
        failures++;
        $display("FAIL assoc %s %s %s", pair2str(x), pair2str(y), pair2str(z));
      end
    end
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
