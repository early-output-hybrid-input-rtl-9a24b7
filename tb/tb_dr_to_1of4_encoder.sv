// Self-checking testbench for dr_to_1of4_encoder. For every operand pair it
// runs a return-to-zero cycle with the operands arriving and leaving one at
// a time, and checks: no output while only one operand is valid; the one
// expected 1-of-4 line (index 2A+B) once both are valid; that line held while
// only one operand has returned to the spacer; all zero once both have.
module tb_dr_to_1of4_encoder;
  import async_pkg::*;
  dual_rail_t a, b;
  one_of_4_t  e;
  int checks = 0, failures = 0;

  dr_to_1of4_encoder dut (.a(a), .b(b), .e(e));

  task automatic expect_e(one_of_4_t exp, string what);
    #1;
    checks++;
    if (e !== exp) begin
      failures++;
      $display("%s: a=%b b=%b e=%b expected %b", what, a, b, e, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0;
    #1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int va = 0; va < 2; va++) begin
        for (int vb = 0; vb < 2; vb++) begin
          one_of_4_t exp;
          exp = one_of_4_t'(1) << (2*va + vb);
          if (rep[0]) a = dr_encode(1'(va)); else b = dr_encode(1'(vb));
          expect_e('0, "one operand valid");
          if (rep[0]) b = dr_encode(1'(vb)); else a = dr_encode(1'(va));
          expect_e(exp, "both valid");
          if (rep[1]) a = '0; else b = '0;
          expect_e(exp, "one operand returned to spacer");
          a = '0; b = '0;
          expect_e('0, "spacer");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
