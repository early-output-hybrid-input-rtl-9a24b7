// Self-checking testbench for c_element: a random walk over the inputs,
// compared after every step with a reference state machine (set on 11,
// clear on 00, hold otherwise). Starts from 00 so the output is defined.
module tb_c_element;
  logic a, b, q;
  logic ref_q;
  int checks = 0, failures = 0;
  int holds = 0;

  c_element dut (.a(a), .b(b), .q(q));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; b = 0; ref_q = 0;
    #1;
    for (int i = 0; i < 400; i++) begin
      if (i % 2 == 0) a = 1'($urandom); else b = 1'($urandom);
      if (a == b) ref_q = a; else holds++;
      #1;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("step %0d a=%0b b=%0b q=%0b expected %0b", i, a, b, q, ref_q);
      end
    end
    if (holds == 0) begin failures++; $display("hold state never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
