// tb_vpo: random triangles (some off screen) into the VPO; checks each
// primitive's pointers and tile box against a reference, the culled count,
// and the rate of one vertex per cycle.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_vpo;
  import vr_pkg::*;
  localparam int W = 200, H = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, idle;
  vertex_t in_vtx;
  prim_t out_prim;
  logic [31:0] prims_in, prims_culled;

  vpo #(.SCREEN_W(W), .SCREEN_H(H)) dut (.*);

  int checks = 0, failures = 0, n_cull = 0;
  prim_t exp [$];

  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    prim_t e;
    checks++;
    if (exp.size() == 0) begin failures++; $display("FAIL unexpected primitive"); end
    else begin
      e = exp.pop_front();
      if (out_prim !== e) begin failures++; $display("FAIL prim %h exp %h", out_prim, e); end
    end
  end

  initial begin
    int t0, cyc;
    in_valid = 0; in_vtx = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = 0; cyc = 0;
    for (int k = 0; k < 200; k++) begin
      vertex_t v [3];
      int xmin, xmax, ymin, ymax, lim;
      xmin = 99999; xmax = 0; ymin = 99999; ymax = 0;
      lim = (k % 4 == 0) ? 4095 : 300;
      for (int i = 0; i < 3; i++) begin
        v[i].x = 16'($urandom_range(lim * 16)); v[i].y = 16'($urandom_range(lim * 16));
        v[i].z = 16'($urandom); v[i].ptr = $urandom;
        if (v[i].x / 16 < xmin) xmin = v[i].x / 16;
        if (v[i].x / 16 > xmax) xmax = v[i].x / 16;
        if (v[i].y / 16 < ymin) ymin = v[i].y / 16;
        if (v[i].y / 16 > ymax) ymax = v[i].y / 16;
      end
      if (xmin >= W || ymin >= H) n_cull++;
      else begin
        prim_t p;
        for (int i = 0; i < 3; i++) p.ptr[i] = v[i].ptr;
        p.tx0 = 8'(xmin / 16); p.ty0 = 8'(ymin / 16);
        p.tx1 = 8'((xmax < W ? xmax : W - 1) / 16);
        p.ty1 = 8'((ymax < H ? ymax : H - 1) / 16);
        exp.push_back(p);
      end
      for (int i = 0; i < 3; i++) begin
        in_vtx = v[i]; in_valid = 1;
        @(posedge clk); cyc++;
        while (!in_ready) begin @(posedge clk); cyc++; end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks += 4;
    if (exp.size() != 0) begin failures++; $display("FAIL %0d primitives missing", exp.size()); end
    if (int'(prims_culled) != n_cull) begin failures++; $display("FAIL culled %0d exp %0d", prims_culled, n_cull); end
    if (n_cull == 0) begin failures++; $display("FAIL nothing culled"); end
    if (cyc != 600) begin failures++; $display("FAIL %0d cycles for 600 vertices", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
