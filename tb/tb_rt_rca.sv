// Self-checking testbench for rt_rca at N = 8. Each vector is random (with
// some all-propagate vectors that make the carry ripple the full width). The
// 2N+1 dual-rail inputs are made valid one at a time in random order; after
// every step each output must be either spacer or its final value (the
// circuit is monotonic: no output ever shows a wrong value), and after the
// last step all outputs must equal the integer sum. Then the operands return
// to the spacer in random order while the carry in is still valid, and all
// outputs must reach the spacer before the carry in is removed (early reset).
module tb_rt_rca;
  import async_pkg::*;
  localparam int N = 8;
  dual_rail_t a [N], b [N], sum [N];
  dual_rail_t cin, cout;
  int checks = 0, failures = 0;
  int n_full_ripple = 0, n_early_reset = 0;

  rt_rca #(.N(N)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic out_ok(dual_rail_t o, logic v);
    return (o == '0) || (o == dr_encode(v));
  endfunction

  initial begin
    logic [N-1:0] va, vb;
    logic         vc;
    logic [N:0]   total;
    int perm [2*N+1];
    for (int i = 0; i < N; i++) begin a[i] = '0; b[i] = '0; end
    cin = '0;
    #1;
    for (int v = 0; v < 300; v++) begin
      va = N'($urandom); vb = N'($urandom); vc = 1'($urandom);
      if (v % 10 == 0) begin vb = ~va; vc = 1'b1; n_full_ripple++; end
      total = {1'b0, va} + {1'b0, vb} + (N+1)'(vc);
      for (int i = 0; i <= 2*N; i++) perm[i] = i;
      for (int i = 2*N; i > 0; i--) begin
        int j, t;
        j = int'($urandom % (i+1));
        t = perm[i]; perm[i] = perm[j]; perm[j] = t;
      end
      for (int s = 0; s <= 2*N; s++) begin
        int k;
        k = perm[s];
        if (k < N) a[k] = dr_encode(va[k]);
        else if (k < 2*N) b[k-N] = dr_encode(vb[k-N]);
        else cin = dr_encode(vc);
        #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (!out_ok(sum[i], total[i])) begin
            failures++;
            $display("vector %0d step %0d: sum[%0d]=%b wrong", v, s, i, sum[i]);
          end
        end
        checks++;
        if (!out_ok(cout, total[N])) begin
          failures++;
          $display("vector %0d step %0d: cout=%b wrong", v, s, cout);
        end
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (sum[i] !== dr_encode(total[i])) begin
          failures++;
          $display("vector %0d: sum[%0d]=%b expected %0b", v, i, sum[i], total[i]);
        end
      end
      checks++;
      if (cout !== dr_encode(total[N])) begin
        failures++;
        $display("vector %0d: cout=%b expected %0b", v, cout, total[N]);
      end
      // return to zero: operands first, in random order, carry in last
      for (int s = 0; s < 2*N; s++) begin
        int k;
        k = int'($urandom % (2*N));
        if (k < N) a[k] = '0; else b[k-N] = '0;
        #1;
      end
      for (int i = 0; i < N; i++) begin a[i] = '0; b[i] = '0; end
      #1;
      checks++;
      if (cout !== '0 || sum.or() != '0) begin
        failures++;
        $display("vector %0d: outputs not spacer with only carry in valid", v);
      end else n_early_reset++;
      cin = '0;
      #1;
    end
    if (n_full_ripple == 0 || n_early_reset == 0) begin
      failures++;
      $display("full ripple or early reset never exercised");
    end
    $display("full_ripple=%0d early_reset=%0d", n_full_ripple, n_early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
