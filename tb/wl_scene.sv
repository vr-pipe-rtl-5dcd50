// wl_scene: renders one synthetic splat scene through a vr_pipe_gpc of a
// given screen size and checks the whole frame (helper of
// tb_vr_pipe_workloads; not hardware of this design).
//
// NSPLAT rectangles (two triangles each) are spread over the screen, denser
// towards the centre as in object-centred captures, with sizes from a few
// pixels to about 100 pixels. The cluster runs with its default bins and
// ROP, early termination and quad merging on, and the Hi-z test off. The
// reference blends every splat in submission order over its bounding box,
// with the same coverage rule, fragment colour and 1/255 pruning as the
// shader model. Each pixel must match within rounding (plus 300/65535 where
// the pixel terminated) and the stencil flag must equal "alpha >= 0.996".
//
// Interface: clk in; done, checks, failures, cycles (draw length) and the
// terminated-pixel count out. Timing: starts after the reset clear; inputs
// are driven at the falling edge.
module wl_scene
  import vr_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int W = 980,
  parameter int H = 545,
  parameter int NSPLAT = 400
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles,
  output int   nterm
);
  localparam int QX = (W + 1) / 2, QY = (H + 1) / 2;
  localparam int QAW = $clog2(QX * QY);
  localparam int RTW = $clog2(((W + 7) / 8) * ((H + 7) / 8));
  logic rst_n;
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

  vr_pipe_gpc #(.SCREEN_W(W), .SCREEN_H(H)) dut (.*);

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

  vertex_t scene [$];
  rgba_t   ref_c [W * H];
  int      ref_n [W * H];

  function automatic int clampi(input int v, input int lo, input int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  task automatic build_and_reference();
    for (int i = 0; i < W * H; i++) begin ref_c[i] = '0; ref_n[i] = 0; end
    for (int s = 0; s < NSPLAT; s++) begin
      int cx, cy, hw, hh, x0, y0, x1, y1;
      cbe_ptr_t ptr;
      vertex_t v [4];
      if (s % 4 == 0) begin
        cx = $urandom_range(W * 16 - 1); cy = $urandom_range(H * 16 - 1);
      end else begin
        cx = W * 8 + ($urandom_range(0, W * 6) - W * 3);
        cy = H * 8 + ($urandom_range(0, H * 6) - H * 3);
      end
      hw = $urandom_range(2 * 16, (s % 8 == 0) ? 100 * 16 : 30 * 16);
      hh = $urandom_range(2 * 16, (s % 8 == 0) ? 80 * 16 : 30 * 16);
      x0 = clampi(cx - hw, 0, 65535); y0 = clampi(cy - hh, 0, 65535);
      x1 = clampi(cx + hw, 0, 65535); y1 = clampi(cy + hh, 0, 65535);
      ptr = $urandom;
      ptr[15:0] = 16'(20000 + $urandom_range(20000));
      v[0].x = 16'(x0); v[0].y = 16'(y0); v[1].x = 16'(x1); v[1].y = 16'(y0);
      v[2].x = 16'(x1); v[2].y = 16'(y1); v[3].x = 16'(x0); v[3].y = 16'(y1);
      for (int k = 0; k < 4; k++) begin
        v[k].z = 16'(100 + s);
        v[k].ptr = ptr ^ cbe_ptr_t'(k);
        amem[v[k].ptr] = '{x: v[k].x, y: v[k].y, z: v[k].z};
      end
      scene.push_back(v[0]); scene.push_back(v[1]); scene.push_back(v[2]);
      scene.push_back(v[0]); scene.push_back(v[2]); scene.push_back(v[3]);
      for (int y = y0 / 16; y <= y1 / 16 + 1 && y < H; y++)
        for (int x = x0 / 16; x <= x1 / 16 + 1 && x < W; x++)
          for (int t = 0; t < 2; t++) begin
            vertex_t a, b, c;
            a = v[0]; b = t ? v[2] : v[1]; c = t ? v[3] : v[2];
            if (ref_covers(a, b, c, x, y)) begin
              rgba_t f;
              f = frag_color(ptr, x, y);
              if (f.a >= PRUNE_TH) begin
                ref_c[y * W + x] = ref_blend(ref_c[y * W + x], f);
                ref_n[y * W + x]++;
              end
            end
          end
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; cycles = 0; nterm = 0; rst_n = 0;
    het_enable = 1; qm_enable = 1; hiz_enable = 0; alpha_th = ALPHA_TH_DEFAULT;
    clear_req = 0; draw_end = 0; vtx_valid = 0; vtx = '0;
    hiz_clear = 0; hiz_wr_valid = 0; hiz_wr_idx = '0; hiz_wr_z = '0; dbg_addr = '0;
    build_and_reference();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (clear_busy) @(negedge clk);
    foreach (scene[i]) begin
      vtx = scene[i]; vtx_valid = 1;
      @(posedge clk);
      while (!vtx_ready) @(posedge clk);
      @(negedge clk);
      cycles++;
      vtx_valid = 0;
    end
    draw_end = 1;
    @(negedge clk);
    while (!(draw_done && !sm_busy && !(|sq_valid))) begin @(negedge clk); cycles++; end
    draw_end = 0;
    for (int qy = 0; qy < QY; qy++)
      for (int qx = 0; qx < QX; qx++) begin
        dbg_addr = QAW'(qy * QX + qx);
        #1;
        for (int f = 0; f < 4; f++) begin
          int x, y, tol;
          rgba_t g, e;
          x = qx * 2 + f % 2; y = qy * 2 + f / 2;
          g = dbg_color[f];
          if (x >= W || y >= H) begin
            checks++;
            if (g != '0) begin failures++; $display("FAIL %0dx%0d: pixel (%0d,%0d) off screen was written", W, H, x, y); end
            continue;
          end
          e = ref_c[y * W + x];
          tol = 2 * ref_n[y * W + x] + ((e.a >= ALPHA_TH_DEFAULT) ? 300 : 0);
          checks += 2;
          if (g.r > e.r + tol || e.r > g.r + tol || g.g > e.g + tol || e.g > g.g + tol ||
              g.b > e.b + tol || e.b > g.b + tol || g.a > e.a + tol || e.a > g.a + tol) begin
            failures++;
            if (failures < 6) $display("FAIL %0dx%0d: pixel (%0d,%0d) got %h exp %h", W, H, x, y, g, e);
          end
          if (dbg_stencil[f][7] !== (g.a >= ALPHA_TH_DEFAULT)) begin
            failures++;
            if (failures < 6) $display("FAIL %0dx%0d: stencil flag at (%0d,%0d)", W, H, x, y);
          end
          if (dbg_stencil[f][7]) nterm++;
        end
      end
    checks++;
    if (stats.quads_terminated == 0 || stats.merge_pairs == 0 || stats.pixels_terminated == 0) begin
      failures++; $display("FAIL %0dx%0d: termination or merging never happened", W, H);
    end
    $display("%0dx%0d: %0d splats, draw %0d cycles, %0d quads rastered, %0d dropped by termination, %0d merge pairs, %0d quads blended, %0d terminated pixels",
             W, H, NSPLAT, cycles, stats.quads_rastered, stats.quads_terminated, stats.merge_pairs,
             stats.quads_blended, nterm);
    done = 1;
  end
endmodule
