// tb_term_test_unit: every coverage mask against random stencil values with
// and without the termination bit, with the test enabled and disabled.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_term_test_unit;
  logic        en;
  logic [3:0]  cov_in, cov_out;
  logic [3:0][7:0] st;
  logic        discard;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  term_test_unit #(.STENCIL_BITS(8)) dut (.enable(en), .cov_in, .stencil(st), .cov_out, .discard);

  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic [3:0] exp;
      en = (i % 4) != 0;
      cov_in = 4'(i);
      for (int f = 0; f < 4; f++) begin
        st[f][6:0] = 7'($urandom);            // ordinary stencil bits do not matter
        st[f][7]   = 1'($urandom);
      end
      #1;
      for (int f = 0; f < 4; f++) exp[f] = cov_in[f] && !(en && st[f][7]);
      checks += 2;
      if (cov_out !== exp) begin failures++; $display("FAIL cov %b st %h -> %b exp %b", cov_in, st, cov_out, exp); end
      if (discard !== (exp == 0)) begin failures++; $display("FAIL discard"); end
    end
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
