// tb_vr_pipe_workloads: the cluster at the frame sizes of the evaluated
// scenes, with default bins, ROP and stencil: 980x545 (Train), 979x546
// (Truck) and 800x800 (Lego, Palace). The 1552x1040 scenes (Kitchen, Bonsai)
// are the default size, run by tb_vr_pipe_full. Odd sizes exercise the
// half-empty quads at the right and bottom edges.
//
// Each size is a wl_scene instance rendering its own synthetic scene of
// splats (the real captured scenes are not available, and their hundreds of
// thousands of Gaussians would not simulate in reasonable time). Each checks
// its whole frame against a reference; this module waits for all and sums.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock;
// a watchdog ends the run as a failure if it hangs.
module tb_vr_pipe_workloads;
  logic clk = 0;
  always #5 clk = ~clk;
  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2, y0, y1, y2, t0, t1, t2;
  wl_scene #(.W(980), .H(545), .NSPLAT(400)) u_train (.clk, .done(d0), .checks(c0), .failures(f0), .cycles(y0), .nterm(t0));
  wl_scene #(.W(979), .H(546), .NSPLAT(400)) u_truck (.clk, .done(d1), .checks(c1), .failures(f1), .cycles(y1), .nterm(t1));
  wl_scene #(.W(800), .H(800), .NSPLAT(300)) u_lego  (.clk, .done(d2), .checks(c2), .failures(f2), .cycles(y2), .nterm(t2));
  int checks, failures;
  initial begin
    #1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2; failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
