// tb_out_m -- exhaustive check of the closure of the output operator on all
// 9 x 9 Kleene operand pairs, against the published truth table (pasted
// below, row = state s^(i-1), column = input bits g_i h_i, order 00 0M 01 M1
// 11 1M 10 M0 MM) and against the closure of the Boolean output function
// computed by enumerating resolutions.  One table cell is corrected (see
// the comment in the loop).
module tb_out_m;
  import mc_pkg::*;
  import mc_tb_pkg::*;

  int checks = 0, failures = 0;
  tpair_t s, b, o;

  out_m dut (.s(s), .b(b), .o(o));

  string table_rows [9] = '{
    "00 M0 10 1M 11 1M 10 M0 MM",
    "00 M0 10 1M 11 MM MM MM MM",
    "00 M0 10 1M 11 M1 01 0M MM",
    "00 MM MM MM 11 M1 01 0M MM",
    "00 0M 01 M1 11 M1 01 0M MM",
    "00 0M 01 M1 11 MM MM MM MM",
    "00 0M 01 M1 11 1M 10 M0 MM",
    "00 MM MM MM 11 1M 10 0M MM",
    "00 MM MM MM 11 MM MM MM MM"};

  initial begin
    for (int i = 0; i < 9; i++)
      for (int j = 0; j < 9; j++) begin
        string exp;
        exp = table_rows[i].substr(3*j, 3*j+1);
        // The published table lists out(M0, M0) = 0M.  The closure of the
        // output function (resolutions {00,10} x {00,10} give 00 and 10) and
        // the published gate formulas both give M0; the table cell is taken
        // to be a misprint and M0 is expected.
        if (i == 7 && j == 7) exp = "M0";
        s = pair_n(i);
        b = pair_n(j);
        #1;
        checks++;
        if (pair2str(o) != exp) begin
          failures++;
          $display("FAIL table out(%s, %s) = %s, expected %s", pair2str(s),
                   pair2str(b), pair2str(o), exp);
        end
        checks++;
        if (o != closure_op(s, b, 1'b1)) begin
          failures++;
          $display("FAIL closure out(%s, %s) = %s", pair2str(s), pair2str(b),
                   pair2str(o));
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
