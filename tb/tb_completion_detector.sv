// Self-checking testbench for completion_detector (W = 5, which gives an
// unbalanced C-element tree). Each round makes the signals valid one at a
// time in random order with random values, checking that done stays 0 until
// the last one is valid and is then 1; then returns them to the spacer one
// at a time, checking done stays 1 until the last one is spacer.
module tb_completion_detector;
  import async_pkg::*;
  localparam int W = 5;
  dual_rail_t d [W];
  logic done;
  int checks = 0, failures = 0;

  completion_detector #(.W(W)) dut (.d(d), .done(done));

  task automatic expect_done(logic exp, string what);
    #1;
    checks++;
    if (done !== exp) begin
      failures++;
      $display("%s: done=%b expected %b", what, done, exp);
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
    int perm [W];
    for (int i = 0; i < W; i++) d[i] = '0;
    #1;
    for (int round = 0; round < 50; round++) begin
      for (int i = 0; i < W; i++) perm[i] = i;
      for (int i = W-1; i > 0; i--) begin
        int j, t;
        j = int'($urandom % (i+1));
        t = perm[i]; perm[i] = perm[j]; perm[j] = t;
      end
      for (int i = 0; i < W; i++) begin
        d[perm[i]] = dr_encode(1'($urandom));
        expect_done(i == W-1, "rising");
      end
      for (int i = 0; i < W; i++) perm[i] = (perm[i] + round) % W;
      for (int i = 0; i < W; i++) begin
        d[perm[i]] = '0;
        expect_done(i != W-1, "falling");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
