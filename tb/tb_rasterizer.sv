// tb_rasterizer: random triangles and split rectangles on a 128x96 screen,
// each sent once per tile grid it touches, with vertex positions served by an
// attribute-buffer model with a two-cycle latency. The quads produced for each
// (primitive, grid) are compared with a per-pixel reference rasterization;
// pixels on an edge shared by two triangles must be drawn exactly once. The
// Hi-z test is exercised by recording near depths over part of the screen.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_rasterizer;
  import vr_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 128, H = 96, RTX = W / 8, RTY = H / 8;
  localparam int RTW = $clog2(RTX * RTY);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic hiz_enable, hiz_clear, hiz_wr_valid;
  logic [RTW-1:0] hiz_wr_idx;
  logic [15:0] hiz_wr_z;
  logic in_valid, in_ready, vf_req_valid, vf_req_ready, vf_rsp_valid, out_valid, out_ready, idle;
  tgc_prim_t in_prim;
  cbe_ptr_t vf_req_ptr;
  vpos_t vf_rsp;
  quad_t out_quad;
  logic [31:0] rtiles_tested, rtiles_hiz_culled, quads_out;

  rasterizer #(.SCREEN_W(W), .SCREEN_H(H)) dut (.*);

  // attribute buffer model
  vpos_t amem [cbe_ptr_t];
  vpos_t pipe1, pipe2; logic v1 = 0, v2 = 0;
  assign vf_req_ready = 1'b1;
  always @(posedge clk) begin
    v2 <= v1; pipe2 <= pipe1;
    v1 <= vf_req_valid; pipe1 <= vf_req_valid ? amem[vf_req_ptr] : '0;
  end
  assign vf_rsp_valid = v2;
  assign vf_rsp = pipe2;

  int checks = 0, failures = 0, total_quads = 0, hiz_culled_quads = 0;
  logic [3:0] got [int];
  int shared_px = 0;
  int cover_cnt [W * H];
  logic [15:0] hiz_tab [RTX * RTY];
  bit hiz_set [RTX * RTY];

  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int key;
    key = (int'(out_quad.ty) * 8 + int'(out_quad.qy)) * 1024 + int'(out_quad.tx) * 8 + int'(out_quad.qx);
    if (got.exists(key)) begin failures++; $display("FAIL quad emitted twice"); end
    got[key] = out_quad.cov;
  end

  task automatic draw(input vertex_t v [3], input logic [15:0] zmin);
    int x0, x1, y0, y1;
    x0 = 9999; x1 = 0; y0 = 9999; y1 = 0;
    for (int i = 0; i < 3; i++) begin
      amem[v[i].ptr] = '{x: v[i].x, y: v[i].y, z: v[i].z};
      if (v[i].x / 16 < x0) x0 = v[i].x / 16;
      if (v[i].x / 16 > x1) x1 = v[i].x / 16;
      if (v[i].y / 16 < y0) y0 = v[i].y / 16;
      if (v[i].y / 16 > y1) y1 = v[i].y / 16;
    end
    if (x1 >= W) x1 = W - 1;
    if (y1 >= H) y1 = H - 1;
    for (int gy = y0 / 64; gy <= y1 / 64; gy++)
      for (int gx = x0 / 64; gx <= x1 / 64; gx++) begin
        got.delete();
        in_prim.ptr[0] = v[0].ptr; in_prim.ptr[1] = v[1].ptr; in_prim.ptr[2] = v[2].ptr;
        in_prim.gid.gx = 8'(gx); in_prim.gid.gy = 8'(gy); in_prim.last = 1'b1;
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
        @(negedge clk);
        wait (idle);
        @(negedge clk);
        // reference over this grid
        for (int qy = gy * 32; qy < gy * 32 + 32 && qy < H / 2; qy++)
          for (int qx = gx * 32; qx < gx * 32 + 32 && qx < W / 2; qx++) begin
            logic [3:0] c;
            int key;
            bit culled;
            for (int f = 0; f < 4; f++) c[f] = ref_covers(v[0], v[1], v[2], qx * 2 + f % 2, qy * 2 + f / 2);
            culled = hiz_enable && hiz_set[(qy / 4) * RTX + qx / 4] && zmin > hiz_tab[(qy / 4) * RTX + qx / 4];
            if (culled && c != 0) begin hiz_culled_quads++; c = 0; end
            for (int f = 0; f < 4; f++) if (c[f]) cover_cnt[(qy * 2 + f / 2) * W + qx * 2 + f % 2]++;
            key = qy * 1024 + qx;
            checks++;
            if (c != 0) total_quads++;
            if ((got.exists(key) ? got[key] : 4'b0) !== c) begin
              failures++;
              $display("FAIL grid (%0d,%0d) quad (%0d,%0d) cov %b exp %b", gx, gy, qx, qy,
                       got.exists(key) ? got[key] : 4'b0, c);
            end
          end
      end
  endtask

  function automatic vertex_t mk(input int x, input int y, input int z);
    vertex_t v;
    v.x = 16'(x); v.y = 16'(y); v.z = 16'(z); v.ptr = $urandom;
    return v;
  endfunction

  initial begin
    vertex_t v [3];
    hiz_enable = 0; hiz_clear = 0; hiz_wr_valid = 0; hiz_wr_idx = '0; hiz_wr_z = '0;
    in_valid = 0; in_prim = '0; out_ready = 1;
    for (int i = 0; i < RTX * RTY; i++) hiz_set[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // rectangles split along a diagonal: every pixel exactly once
    for (int r = 0; r < 6; r++) begin
      int x0, y0, x1, y1;
      for (int i = 0; i < W * H; i++) cover_cnt[i] = 0;
      x0 = $urandom_range(100 * 16); y0 = $urandom_range(70 * 16);
      x1 = x0 + $urandom_range(16, 60 * 16); y1 = y0 + $urandom_range(16, 40 * 16);
      v[0] = mk(x0, y0, 10); v[1] = mk(x1, y0, 10); v[2] = mk(x1, y1, 10);
      draw(v, 10);
      v[0] = mk(x0, y0, 10); v[1] = mk(x1, y1, 10); v[2] = mk(x0, y1, 10);
      draw(v, 10);
      for (int i = 0; i < W * H; i++) begin
        if (cover_cnt[i] > 1) begin failures++; $display("FAIL pixel %0d drawn twice", i); end
      end
      checks++;
    end
    // random triangles of both windings
    for (int r = 0; r < 40; r++) begin
      for (int i = 0; i < 3; i++) v[i] = mk($urandom_range(140 * 16), $urandom_range(100 * 16), $urandom_range(100, 200));
      draw(v, 16'(v[0].z < v[1].z ? (v[0].z < v[2].z ? v[0].z : v[2].z) : (v[1].z < v[2].z ? v[1].z : v[2].z)));
    end
    // Hi-z: near depth 50 over the left half; far primitives there are culled
    for (int i = 0; i < RTX * RTY; i++) if (i % RTX < RTX / 2) begin
      @(negedge clk);
      hiz_wr_valid = 1; hiz_wr_idx = RTW'(i); hiz_wr_z = 16'd50;
      hiz_set[i] = 1; hiz_tab[i] = 16'd50;
    end
    @(negedge clk); hiz_wr_valid = 0; hiz_enable = 1;
    for (int r = 0; r < 10; r++) begin
      int z;
      z = (r % 2) ? 20 : 150;
      for (int i = 0; i < 3; i++) v[i] = mk($urandom_range(120 * 16), $urandom_range(90 * 16), z);
      draw(v, 16'(z));
    end
    checks += 3;
    if (hiz_culled_quads == 0 || rtiles_hiz_culled == 0) begin failures++; $display("FAIL Hi-z never culled"); end
    if (int'(quads_out) != total_quads) begin failures++; $display("FAIL quads_out %0d exp %0d", quads_out, total_quads); end
    if (total_quads < 100) begin failures++; $display("FAIL too few quads"); end
    $display("quads=%0d hiz_culled_quads=%0d", total_quads, hiz_culled_quads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
