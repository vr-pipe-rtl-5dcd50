// tb_vr_pipe_full: the cluster at its default (paper-sized) configuration:
// 1552x1040 screen, 128 TGC bins of 16 primitives, 32 TC bins of 128 quads,
// two ROP quads per cycle, 8-bit stencil, threshold 0.996.
//
// After the reset clear of the full colour and stencil surfaces (one quad
// word per cycle), a batch of overlapping splats spread over the screen is
// rendered with early termination and quad merging enabled. Pixels inside
// the splats' bounding boxes are compared against the per-pixel reference,
// with the same tolerance as the reduced test; the stencil flag must match
// the pixel alpha; the termination and merging mechanisms must occur.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_vr_pipe_full;
  import vr_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 1552, H = 1040, NSPLAT = 40;
  localparam int QAW = $clog2((W / 2) * (H / 2));
  localparam int RTW = $clog2(((W + 7) / 8) * ((H + 7) / 8));
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic het_enable, qm_enable, hiz_enable, clear_req, clear_busy, draw_end, draw_done;
  logic [15:0] alpha_th;
  logic vtx_valid, vtx_ready, vf_req_valid, vf_req_ready, vf_rsp_valid;
  vertex_t vtx;
  cbe_ptr_t vf_req_ptr;
  vpos_t vf_rsp;
  logic hiz_clear, hiz_wr_valid;
  logic [RTW-1:0] hiz_wr_idx;
  logic [15:0] hiz_wr_z;
  logic warp_valid, warp_ready, sq_ready;
  warp_slot_t warp_slot;
  logic [1:0] sq_valid;
  shaded_quad_t [1:0] sq;
  gpc_stats_t stats;
  logic [QAW-1:0] dbg_addr;
  rgba_t [3:0] dbg_color;
  logic [3:0][7:0] dbg_stencil;

  vr_pipe_gpc dut (.*);

  int frags_pruned, quads_merged;
  logic sm_busy;
  sm_model u_sm (.clk, .rst_n, .warp_valid, .warp_slot, .warp_ready, .sq_valid, .sq, .sq_ready,
                 .frags_pruned, .quads_merged, .busy(sm_busy));

  vpos_t amem [cbe_ptr_t];
  vpos_t p1, p2; logic v1 = 0, v2 = 0;
  assign vf_req_ready = 1'b1;
  always @(posedge clk) begin
    v2 <= v1; p2 <= p1;
    v1 <= vf_req_valid; p1 <= vf_req_valid ? amem[vf_req_ptr] : '0;
  end
  assign vf_rsp_valid = v2;
  assign vf_rsp = p2;

  int checks = 0, failures = 0;
  vertex_t scene [$];
  int bx0 = W, by0 = H, bx1 = 0, by1 = 0;   // union of splat boxes (pixels)

  task automatic build_scene();
    for (int s = 0; s < NSPLAT; s++) begin
      int cx, cy, hw, hh, x0, y0, x1, y1;
      cbe_ptr_t ptr;
      vertex_t a, b, c, d;
      cx = 700 * 16 + $urandom_range(0, 200 * 16); cy = 500 * 16 + $urandom_range(0, 100 * 16);
      if (s == NSPLAT - 1) begin cx = 1540 * 16; cy = 1030 * 16; end   // crosses the screen corner
      hw = $urandom_range(10 * 16, 60 * 16); hh = $urandom_range(10 * 16, 50 * 16);
      x0 = cx - hw; y0 = cy - hh; x1 = cx + hw; y1 = cy + hh;
      ptr = $urandom;
      ptr[15:0] = 16'(38000 + $urandom_range(2000));
      a.x = 16'(x0); a.y = 16'(y0); b.x = 16'(x1); b.y = 16'(y0);
      c.x = 16'(x1); c.y = 16'(y1); d.x = 16'(x0); d.y = 16'(y1);
      a.z = 16'(100 + s); b.z = a.z; c.z = a.z; d.z = a.z;
      a.ptr = ptr; b.ptr = ptr ^ 32'h1; c.ptr = ptr ^ 32'h2; d.ptr = ptr ^ 32'h3;
      amem[a.ptr] = '{x: a.x, y: a.y, z: a.z};
      amem[b.ptr] = '{x: b.x, y: b.y, z: b.z};
      amem[c.ptr] = '{x: c.x, y: c.y, z: c.z};
      amem[d.ptr] = '{x: d.x, y: d.y, z: d.z};
      scene.push_back(a); scene.push_back(b); scene.push_back(c);
      scene.push_back(a); scene.push_back(c); scene.push_back(d);
      if (x0 / 16 < bx0) bx0 = x0 / 16;
      if (y0 / 16 < by0) by0 = y0 / 16;
      if (x1 / 16 + 1 > bx1) bx1 = x1 / 16 + 1;
      if (y1 / 16 + 1 > by1) by1 = y1 / 16 + 1;
    end
    if (bx1 > W) bx1 = W;
    if (by1 > H) by1 = H;
    bx0 &= ~1; by0 &= ~1;
  endtask

  function automatic void ref_pixel(input int x, input int y, output rgba_t c, output int n);
    c = '0; n = 0;
    for (int t = 0; t < scene.size(); t += 3)
      if (ref_covers(scene[t], scene[t + 1], scene[t + 2], x, y)) begin
        rgba_t f;
        f = frag_color(scene[t].ptr, x, y);
        if (f.a >= PRUNE_TH) begin c = ref_blend(c, f); n++; end
      end
  endfunction

  task automatic compare();
    int bad = 0, nterm = 0;
    for (int qy = by0 / 2; qy < by1 / 2 + 1 && qy < H / 2; qy++)
      for (int qx = bx0 / 2; qx < bx1 / 2 + 1 && qx < W / 2; qx++) begin
        dbg_addr = QAW'(qy * (W / 2) + qx);
        #1;
        for (int f = 0; f < 4; f++) begin
          int x, y, n, tol;
          rgba_t g, e;
          x = qx * 2 + f % 2; y = qy * 2 + f / 2;
          ref_pixel(x, y, e, n);
          g = dbg_color[f];
          tol = 2 * n + ((e.a >= ALPHA_TH_DEFAULT) ? 300 : 0);
          checks += 2;
          if (g.r > e.r + tol || e.r > g.r + tol || g.g > e.g + tol || e.g > g.g + tol ||
              g.b > e.b + tol || e.b > g.b + tol || g.a > e.a + tol || e.a > g.a + tol) begin
            bad++;
            if (bad < 6) $display("FAIL pixel (%0d,%0d) got %h exp %h n=%0d", x, y, g, e, n);
          end
          if (dbg_stencil[f][7] !== (g.a >= ALPHA_TH_DEFAULT)) begin
            bad++;
            if (bad < 6) $display("FAIL stencil flag at (%0d,%0d)", x, y);
          end
          if (dbg_stencil[f][7]) nterm++;
        end
      end
    failures += bad;
    $display("compared region (%0d,%0d)-(%0d,%0d): %0d mismatches, %0d terminated pixels",
             bx0, by0, bx1, by1, bad, nterm);
  endtask

  task automatic need(input int v, input string what);
    checks++;
    if (v <= 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, v);
  endtask

  initial begin
    int cyc;
    het_enable = 1; qm_enable = 1; hiz_enable = 1; alpha_th = ALPHA_TH_DEFAULT;
    clear_req = 0; draw_end = 0; vtx_valid = 0; vtx = '0;
    hiz_clear = 0; hiz_wr_valid = 0; hiz_wr_idx = '0; hiz_wr_z = '0; dbg_addr = '0;
    build_scene();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cyc = 0;
    while (clear_busy) begin @(negedge clk); cyc++; end
    $display("surface clear took %0d cycles", cyc);
    checks++;
    if (cyc < (W / 2) * (H / 2) - 2) begin failures++; $display("FAIL clear too short"); end
    foreach (scene[i]) begin
      vtx = scene[i]; vtx_valid = 1;
      @(posedge clk);
      while (!vtx_ready) @(posedge clk);
      @(negedge clk);
      vtx_valid = 0;
    end
    draw_end = 1;
    @(negedge clk);
    while (!(draw_done && !sm_busy && !(|sq_valid))) @(negedge clk);
    repeat (10) @(negedge clk);
    draw_end = 0;
    compare();
    need(int'(stats.prims_in) == 2 * NSPLAT ? 1 : 0, "all triangles assembled");
    need(int'(stats.quads_rastered), "quads rasterized");
    need(int'(stats.quads_terminated), "quads dropped by term. test");
    need(int'(stats.pixels_terminated), "termination updates");
    need(int'(stats.merge_pairs), "merge pairs");
    need(int'(stats.warps_launched), "warps launched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
