// tb_alpha_test_unit: exhaustive corner cases and random values against the
// termination rule (old below threshold and new at or above it).
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_alpha_test_unit;
  logic [15:0] old_a, new_a, th;
  logic        term;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  alpha_test_unit dut (.old_alpha(old_a), .new_alpha(new_a), .alpha_th(th), .terminated(term));

  task automatic check(input int o, input int n, input int t);
    bit exp;
    old_a = 16'(o); new_a = 16'(n); th = 16'(t);
    #1;
    exp = (o < t) && (n >= t);
    checks++;
    if (term !== exp) begin
      failures++;
      $display("FAIL old=%0d new=%0d th=%0d got %0b exp %0b", o, n, t, term, exp);
    end
  endtask

  initial begin
    // around the default threshold 65273 (alpha 0.996)
    for (int o = 65270; o <= 65276; o++)
      for (int n = 65270; n <= 65276; n++) check(o, n, 65273);
    check(0, 65535, 65273);
    check(65535, 65535, 65273);
    check(65272, 65273, 65273);
    check(65273, 65273, 65273);
    for (int i = 0; i < 2000; i++) check($urandom_range(65535), $urandom_range(65535), $urandom_range(65535));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
