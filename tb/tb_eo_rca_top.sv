// End-to-end testbench for eo_rca_top at its default width (32 bits).
//
// It plays the sender of a 4-phase return-to-zero channel: 1100 additions
// (random operands, plus every tenth one all-propagate so the carry ripples
// the full width), one every 20 time units. Per addition:
//   1. operands valid, carry in still spacer: out_done must stay 0 (bit 0's
//      sum needs the carry); if any stage generates or kills, the carry out
//      can already be valid (counted as an early carry).
//   2. carry in valid: wait for out_done, then in_done must be 1 and sum and
//      cout must equal the integer sum.
//   3. operands back to spacer, carry in held valid: out_done must fall
//      (early reset of all outputs) while in_done stays 1 (the input
//      detector still waits for the carry in, so its late return is
//      acknowledged).
//   4. carry in to spacer: in_done must fall.
// Counts propagate / generate / kill stages, full-width ripples, early
// carries and early resets; one that never happened is a failure.
module tb_eo_rca_top;
  import async_pkg::*;
  localparam int N = 32;
  localparam int VECTORS = 1100;
  dual_rail_t a [N], b [N], sum [N];
  dual_rail_t cin, cout;
  logic in_done, out_done;
  int checks = 0, failures = 0;
  int n_prop = 0, n_gen = 0, n_kill = 0, n_full_ripple = 0;
  int n_early_carry = 0, n_early_reset = 0, n_in_hold = 0;

  eo_rca_top dut (
    .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout),
    .in_done(in_done), .out_done(out_done)
  );

  task automatic check(logic cond, string what, int v);
    checks++;
    if (!cond) begin
      failures++;
      $display("vector %0d: %s", v, what);
    end
  endtask

  initial begin
    #(VECTORS * 40 + 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] va, vb;
    logic         vc;
    logic [N:0]   total;
    for (int i = 0; i < N; i++) begin a[i] = '0; b[i] = '0; end
    cin = '0;
    #2;
    check(!in_done && !out_done, "detectors not reset at start", -1);
    for (int v = 0; v < VECTORS; v++) begin
      va = $urandom; vb = $urandom; vc = 1'($urandom);
      if (v % 10 == 0) begin vb = ~va; vc = ~vc; n_full_ripple++; end
      total = {1'b0, va} + {1'b0, vb} + (N+1)'(vc);
      for (int i = 0; i < N; i++) begin
        if (va[i] ^ vb[i]) n_prop++; else if (va[i]) n_gen++; else n_kill++;
      end
      // 1. operands only
      for (int i = 0; i < N; i++) begin a[i] = dr_encode(va[i]); b[i] = dr_encode(vb[i]); end
      #2;
      check(!out_done, "out_done before carry in", v);
      check(!in_done, "in_done before carry in", v);
      if (~(va ^ vb) != '0) begin
        check(cout == dr_encode(total[N]), "early carry out wrong", v);
        n_early_carry++;
      end else begin
        check(cout == '0, "carry out without carry in on full propagate", v);
      end
      // 2. carry in
      cin = dr_encode(vc);
      wait (out_done);
      #1;
      check(in_done, "in_done not set with all inputs valid", v);
      for (int i = 0; i < N; i++) check(sum[i] == dr_encode(total[i]), "sum bit wrong", v);
      check(cout == dr_encode(total[N]), "carry out wrong", v);
      #5;
      // 3. operands to spacer, carry in held
      for (int i = 0; i < N; i++) begin a[i] = '0; b[i] = '0; end
      wait (!out_done);
      #1;
      check(cout == '0 && sum.or() == '0, "outputs not spacer after early reset", v);
      n_early_reset++;
      check(in_done, "in_done fell before carry in returned to zero", v);
      if (in_done) n_in_hold++;
      #5;
      // 4. carry in to spacer
      cin = '0;
      #1;
      check(!in_done, "in_done not cleared", v);
      #5;
    end
    check(n_prop > 0, "no propagate stage", -1);
    check(n_gen > 0, "no generate stage", -1);
    check(n_kill > 0, "no kill stage", -1);
    check(n_full_ripple > 0, "no full-width ripple", -1);
    check(n_early_carry > 0, "no early carry", -1);
    check(n_early_reset > 0, "no early reset", -1);
    check(n_in_hold > 0, "input detector never held for late carry in", -1);
    $display("vectors=%0d propagate=%0d generate=%0d kill=%0d full_ripple=%0d early_carry=%0d early_reset=%0d late_cin_ack=%0d",
             VECTORS, n_prop, n_gen, n_kill, n_full_ripple, n_early_carry, n_early_reset, n_in_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
