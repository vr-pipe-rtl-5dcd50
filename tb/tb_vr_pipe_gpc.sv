// tb_vr_pipe_gpc: end-to-end test of the cluster on a reduced configuration
// (256x192 screen, 4 TGC bins of 4 primitives, 4 TC bins of 16 quads, TC
// timeout 120 cycles) with the shader-core model.
//
// A scene of overlapping splats, each a rectangle drawn as two triangles, is
// rendered twice: once with early termination and quad merging (VR-Pipe) and
// once with both disabled (baseline), with a surface clear in between. A
// reference renders the scene per pixel in submission order with the
// independent blend and coverage functions. Checks:
//  * baseline: every pixel equals the reference exactly;
//  * VR-Pipe: every pixel is within rounding of the reference, plus at most
//    the light a terminated pixel may still let through (1 - 0.996);
//  * the stencil termination flag is set exactly where the pixel alpha has
//    reached the threshold;
//  * each mechanism occurs at least once: TGC full / eviction / drain flushes,
//    TC full / eviction / timeout / drain flushes, Hi-z culling, termination
//    test discards, termination updates, merge pairs, alpha pruning;
//  * VR-Pipe blends fewer quads in the ROP than the baseline.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_vr_pipe_gpc;
  import vr_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 256, H = 192, NSPLAT = 90;
  localparam int QAW = $clog2((W / 2) * (H / 2));
  localparam int RTW = $clog2((W / 8) * (H / 8));
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

  vr_pipe_gpc #(.SCREEN_W(W), .SCREEN_H(H), .TGC_BINS(4), .TGC_BIN_SIZE(4),
                .TC_BINS(4), .TC_BIN_SIZE(16), .TC_TIMEOUT(120)) dut (.*);

  int frags_pruned, quads_merged;
  logic sm_busy;
  sm_model u_sm (.clk, .rst_n, .warp_valid, .warp_slot, .warp_ready, .sq_valid, .sq, .sq_ready,
                 .frags_pruned, .quads_merged, .busy(sm_busy));

  // attribute buffer model: in-order responses after two cycles
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
  rgba_t ref_c [W * H];
  int    ref_n [W * H];
  bit    ref_term [W * H];

  // Hi-z: raster tile (0,0) holds depth 0, all splats are deeper
  function automatic bit hiz_culled(input int x, input int y);
    return (x < 8) && (y < 8);
  endfunction

  task automatic build_scene();
    for (int s = 0; s < NSPLAT; s++) begin
      int cx, cy, hw, hh, x0, y0, x1, y1;
      cbe_ptr_t ptr;
      vertex_t a, b, c, d;
      // most splats cluster around the centre so that pixels terminate
      cx = (s % 3 == 0) ? $urandom_range(W * 16 - 1) : 128 * 16 + $urandom_range(0, 60 * 16) - 30 * 16;
      cy = (s % 3 == 0) ? $urandom_range(H * 16 - 1) : 96 * 16 + $urandom_range(0, 40 * 16) - 20 * 16;
      hw = $urandom_range(3 * 16, 26 * 16); hh = $urandom_range(3 * 16, 20 * 16);
      if (s == 5) begin cx = 2 * 16; cy = 2 * 16; end          // touches the Hi-z tile
      x0 = (cx > hw) ? cx - hw : 0; y0 = (cy > hh) ? cy - hh : 0;
      x1 = cx + hw; y1 = cy + hh;
      ptr = $urandom;
      ptr[15:0] = 16'($urandom_range(30000));
      if (s % 2 == 0) ptr[15:0] = 16'(ptr[15:0] % 2000 + 38000);   // dense ones
      a.x = 16'(x0); a.y = 16'(y0); b.x = 16'(x1); b.y = 16'(y0);
      c.x = 16'(x1); c.y = 16'(y1); d.x = 16'(x0); d.y = 16'(y1);
      a.z = 16'(100 + s); b.z = a.z; c.z = a.z; d.z = a.z;
      // one attribute record per splat (shared colour); the four vertices
      // get their own pointers for the positions
      a.ptr = ptr; b.ptr = ptr ^ 32'h1; c.ptr = ptr ^ 32'h2; d.ptr = ptr ^ 32'h3;
      amem[a.ptr] = '{x: a.x, y: a.y, z: a.z};
      amem[b.ptr] = '{x: b.x, y: b.y, z: b.z};
      amem[c.ptr] = '{x: c.x, y: c.y, z: c.z};
      amem[d.ptr] = '{x: d.x, y: d.y, z: d.z};
      // two triangles, the first vertex of each carries the splat's pointer
      scene.push_back(a); scene.push_back(b); scene.push_back(c);
      // second triangle starts at a copy of a's pointer too
      scene.push_back(a); scene.push_back(c); scene.push_back(d);
    end
  endtask

  task automatic reference();
    for (int i = 0; i < W * H; i++) begin ref_c[i] = '0; ref_n[i] = 0; ref_term[i] = 0; end
    for (int t = 0; t < scene.size(); t += 3)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          if (!hiz_culled(x, y) && ref_covers(scene[t], scene[t + 1], scene[t + 2], x, y)) begin
            rgba_t c;
            c = frag_color(scene[t].ptr, x, y);
            if (c.a >= PRUNE_TH) begin
              ref_c[y * W + x] = ref_blend(ref_c[y * W + x], c);
              ref_n[y * W + x]++;
              if (ref_c[y * W + x].a >= ALPHA_TH_DEFAULT) ref_term[y * W + x] = 1;
            end
          end
  endtask

  task automatic draw(input bit het, input bit qm);
    @(negedge clk);
    het_enable = het; qm_enable = qm;
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
  endtask

  task automatic compare(input bit het, input string tag);
    int bad = 0, nterm = 0;
    for (int qy = 0; qy < H / 2; qy++)
      for (int qx = 0; qx < W / 2; qx++) begin
        dbg_addr = QAW'(qy * (W / 2) + qx);
        #1;
        for (int f = 0; f < 4; f++) begin
          int i, tol;
          rgba_t g, e;
          i = (qy * 2 + f / 2) * W + qx * 2 + f % 2;
          g = dbg_color[f]; e = ref_c[i];
          tol = het ? (2 * ref_n[i] + (ref_term[i] ? 300 : 0)) : 0;
          checks++;
          if (g.r > e.r + tol || e.r > g.r + tol || g.g > e.g + tol || e.g > g.g + tol ||
              g.b > e.b + tol || e.b > g.b + tol || g.a > e.a + tol || e.a > g.a + tol) begin
            bad++;
            if (bad < 6) $display("FAIL %s pixel (%0d,%0d) got %h exp %h n=%0d", tag, qx * 2 + f % 2, qy * 2 + f / 2, g, e, ref_n[i]);
          end
          if (het) begin
            checks++;
            if (dbg_stencil[f][7] !== (g.a >= ALPHA_TH_DEFAULT)) begin
              bad++;
              if (bad < 6) $display("FAIL %s stencil flag at (%0d,%0d)", tag, qx * 2 + f % 2, qy * 2 + f / 2);
            end
            if (dbg_stencil[f][7]) nterm++;
          end
        end
      end
    failures += bad;
    $display("%s: %0d pixel mismatches, %0d terminated pixels", tag, bad, nterm);
  endtask

  task automatic need(input int v, input string what);
    checks++;
    if (v <= 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, v);
  endtask

  initial begin
    gpc_stats_t s1;
    int pruned1, merged1;
    het_enable = 1; qm_enable = 1; hiz_enable = 1; alpha_th = ALPHA_TH_DEFAULT;
    clear_req = 0; draw_end = 0; vtx_valid = 0; vtx = '0;
    hiz_clear = 0; hiz_wr_valid = 0; hiz_wr_idx = '0; hiz_wr_z = '0; dbg_addr = '0;
    build_scene();
    reference();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    hiz_wr_valid = 1; hiz_wr_idx = '0; hiz_wr_z = 16'd0;
    @(negedge clk);
    hiz_wr_valid = 0;
    wait (!clear_busy);
    draw(1, 1);
    compare(1, "VR-Pipe");
    s1 = stats; pruned1 = frags_pruned; merged1 = quads_merged;
    $display("mechanisms (VR-Pipe draw):");
    need(int'(s1.tgc_flush_full), "TGC full flushes");
    need(int'(s1.tgc_flush_evict), "TGC eviction flushes");
    need(int'(s1.tgc_flush_drain), "TGC drain flushes");
    need(int'(s1.tc_flush_full), "TC full flushes");
    need(int'(s1.tc_flush_evict), "TC eviction flushes");
    need(int'(s1.tc_flush_timeout), "TC timeout flushes");
    need(int'(s1.tc_flush_drain), "TC drain flushes");
    need(int'(s1.rtiles_hiz_culled), "Hi-z culled raster tiles");
    need(int'(s1.quads_terminated), "quads dropped by term. test");
    need(int'(s1.frags_terminated), "fragments terminated");
    need(int'(s1.pixels_terminated), "termination updates");
    need(int'(s1.merge_pairs), "merge pairs");
    need(merged1, "quads merged in shader");
    need(pruned1, "fragments alpha-pruned");
    need(int'(s1.prims_in) == 2 * NSPLAT ? 1 : 0, "all triangles assembled");
    // baseline draw after a clear
    @(negedge clk); clear_req = 1; @(negedge clk); clear_req = 0;
    @(negedge clk);
    wait (!clear_busy);
    draw(0, 0);
    compare(0, "baseline");
    $display("ROP quads blended: VR-Pipe %0d, baseline %0d", s1.quads_blended, stats.quads_blended - s1.quads_blended);
    need(int'(stats.quads_blended - s1.quads_blended) > int'(s1.quads_blended) ? 1 : 0, "fewer ROP quads with VR-Pipe");
    need(int'(stats.merge_pairs == s1.merge_pairs), "no pairs with merging off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
