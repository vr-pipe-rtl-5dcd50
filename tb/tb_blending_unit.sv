// tb_blending_unit: front-to-back blend against the integer-division
// reference, including the saturating and fully transparent/opaque corners.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_blending_unit;
  import vr_pkg::*;
  import tb_ref_pkg::*;
  rgba_t dst, src, out, exp;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  blending_unit dut (.dst, .src, .out);

  function automatic rgba_t rnd_pm();
    rgba_t c;
    c.a = 16'($urandom_range(65535));
    c.r = 16'(ref_mul($urandom_range(65535), c.a));
    c.g = 16'(ref_mul($urandom_range(65535), c.a));
    c.b = 16'(ref_mul($urandom_range(65535), c.a));
    return c;
  endfunction

  task automatic check(input rgba_t d, input rgba_t s);
    dst = d; src = s;
    #1;
    exp = ref_blend(d, s);
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL dst=%h src=%h got %h exp %h", d, s, out, exp);
    end
  endtask

  initial begin
    check('0, '0);
    check('0, {16'd100, 16'd200, 16'd300, 16'd1000});      // empty pixel takes the fragment
    check({4{16'hFFFF}}, {4{16'h8000}});                    // opaque pixel ignores it
    check({16'hFFFF, 16'h0, 16'h0, 16'h8000}, {4{16'hFFFF}}); // red saturates
    for (int i = 0; i < 5000; i++) check(rnd_pm(), rnd_pm());
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
