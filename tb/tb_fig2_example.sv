// Replays the 2-bit ripple carry adder example: both stages in carry-propagate
// mode (A=0, B=1 in each bit, i.e. 1-of-4 lines E1 and E5) with carry in 0.
// Data phase: the least significant stage's carry out becomes 0 (rail 0 high),
// which makes the most significant stage's carry out 0; both sums are 1.
// Return-to-zero phase: only the operands return to the spacer while the
// primary carry in stays valid; all sums and carries must still return to
// the spacer (early reset), and the 1-of-4 and internal lines are checked on
// the way.
module tb_fig2_example;
  import async_pkg::*;
  dual_rail_t a [2], b [2], sum [2];
  dual_rail_t cin, cout;
  int checks = 0, failures = 0;

  rt_rca #(.N(2)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a[0] = '0; a[1] = '0; b[0] = '0; b[1] = '0; cin = '0;
    #1;
    // valid data phase
    cin = dr_encode(1'b0);                       // CIN00 = 1
    for (int i = 0; i < 2; i++) begin
      a[i] = dr_encode(1'b0);
      b[i] = dr_encode(1'b1);
    end
    #1;
    check(dut.g_bit[0].u_enc.e == 4'b0010, "E1 is the only active line of stage 0");
    check(dut.g_bit[1].u_enc.e == 4'b0010, "E5 is the only active line of stage 1");
    check(dut.carry[1] == dr_encode(1'b0), "COUT00 = 1");
    check(sum[0] == dr_encode(1'b1), "SUM01 = 1");
    check(sum[1] == dr_encode(1'b1), "SUM11 = 1");
    check(cout == dr_encode(1'b0), "COUT10 = 1");
    // partial return to zero: operands only, carry in held
    for (int i = 0; i < 2; i++) begin a[i] = '0; b[i] = '0; end
    #1;
    check(cin == dr_encode(1'b0), "carry in still valid");
    check(dut.g_bit[0].u_fa.int2 == 1'b0 && dut.g_bit[0].u_fa.int3 == 1'b0,
          "OR2 and OR3 output 0");
    check(sum[0] == '0, "SUM01 returned to 0");
    check(dut.g_bit[1].u_fa.int2 == 1'b0 && dut.g_bit[1].u_fa.int3 == 1'b0,
          "OR5 and OR6 output 0");
    check(sum[1] == '0, "SUM11 returned to 0");
    check(cout == '0, "COUT10 returned to 0");
    check(dut.carry[1] == '0, "internal carry COUT00 returned to 0");
    cin = '0;
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
