// Self-checking testbench for eo_full_adder. For each operand pair and carry
// in, and both arrival orders, it checks against integer arithmetic:
//  - the valid sum and carry out once operands and carry are valid;
//  - generate / kill mode: carry out valid from the operands alone, carry in
//    still spacer, and sum still spacer (sum needs the carry);
//  - propagate mode: nothing valid until the carry arrives;
//  - early reset: operands back to spacer with carry in still valid drives
//    both outputs to the spacer;
//  - outputs are never the invalid code 11.
// It counts how often each mode and the early reset were exercised.
module tb_eo_full_adder;
  import async_pkg::*;
  one_of_4_t  e;
  dual_rail_t cin, sum, cout;
  int checks = 0, failures = 0;
  int n_prop = 0, n_gen = 0, n_kill = 0, n_early_reset = 0, n_early_set = 0;

  eo_full_adder dut (.e(e), .cin(cin), .sum(sum), .cout(cout));

  task automatic expect_out(dual_rail_t es, dual_rail_t ec, string what);
    #1;
    checks++;
    if (sum !== es || cout !== ec) begin
      failures++;
      $display("%s: e=%b cin=%b sum=%b cout=%b expected sum=%b cout=%b",
               what, e, cin, sum, cout, es, ec);
    end
  endtask

  always @(sum or cout) begin
    if ((sum.r1 & sum.r0) | (cout.r1 & cout.r0)) begin
      failures++;
      $display("invalid dual-rail output sum=%b cout=%b", sum, cout);
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    e = '0; cin = '0;
    #1;
    for (int order = 0; order < 2; order++) begin
      for (int ab = 0; ab < 4; ab++) begin
        for (int c = 0; c < 2; c++) begin
          int x, y, total;
          x = ab >> 1; y = ab & 1;
          total = x + y + c;
          if (order == 0) begin
            // operands first
            e = one_of_4_t'(1) << ab;
            if (x == y) begin
              expect_out('0, dr_encode(1'(x)), "early carry, carry in spacer");
              n_early_set++;
            end else begin
              expect_out('0, '0, "propagate waits for carry");
            end
            cin = dr_encode(1'(c));
          end else begin
            cin = dr_encode(1'(c));
            expect_out('0, '0, "carry in alone");
            e = one_of_4_t'(1) << ab;
          end
          expect_out(dr_encode(1'(total & 1)), dr_encode(1'(total >> 1)), "valid data");
          if (x == y) begin if (x) n_gen++; else n_kill++; end else n_prop++;
          // early reset: operands to spacer, carry in stays valid
          e = '0;
          expect_out('0, '0, "early reset");
          n_early_reset++;
          cin = '0;
          expect_out('0, '0, "spacer");
        end
      end
    end
    if (n_prop == 0 || n_gen == 0 || n_kill == 0 || n_early_reset == 0 || n_early_set == 0) begin
      failures++;
      $display("a mode was never exercised");
    end
    $display("modes: propagate=%0d generate=%0d kill=%0d early_set_carry=%0d early_reset=%0d",
             n_prop, n_gen, n_kill, n_early_set, n_early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
