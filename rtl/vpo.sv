// vpo: vertex processing and operations unit (primitive assembly and tile
// identification).
//
// Shaded vertices arrive one per cycle as {x, y (12.4 fixed point), z,
// attribute pointer}. Every three consecutive vertices form a triangle (a
// triangle list; the paper's splats are two triangles each). For each
// triangle the unit computes the pixel bounding box, drops the triangle when
// the box lies entirely outside the SCREEN_W x SCREEN_H screen (view frustum
// culling in screen space), clamps the box to the screen and converts it to
// screen tiles of 16x16 pixels. The primitive sent on carries only its three
// attribute pointers and the tile box: positions stay in the attribute
// buffer and are fetched again by the rasterizer.
//
// With a single cluster (the paper's one-GPC configuration) every tile
// belongs to this cluster, so the crossbar that would distribute primitives
// among clusters reduces to a wire and is not built. Clipping against the
// near/far planes is not done (coordinates are already screen positions).
//
// Timing: one vertex per cycle in; a primitive leaves from an output register
// the cycle after its third vertex. valid/ready on both sides.
//
// From the paper: triangles from two-triangle splats, 16x16 screen tiles,
// bounding-box tile identification. Own choices: 12.4 fixed point, culling
// only against the screen, dropping the crossbar for one cluster.
module vpo
  import vr_pkg::*;
#(
  parameter int unsigned SCREEN_W = 1552,
  parameter int unsigned SCREEN_H = 1040
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  vertex_t     in_vtx,
  output logic        in_ready,
  output logic        out_valid,
  output prim_t       out_prim,
  input  logic        out_ready,
  output logic        idle,
  output logic [31:0] prims_in,
  output logic [31:0] prims_culled
);
  vertex_t    v [2];
  logic [1:0] cnt;

  // bounding box of {v[0], v[1], in_vtx} in whole pixels
  logic [11:0] px [3];
  logic [11:0] py [3];
  logic [11:0] xmin, xmax, ymin, ymax, xmax_c, ymax_c;
  logic        culled;
  prim_t       p;
  always_comb begin
    px[0] = v[0].x[15:4]; px[1] = v[1].x[15:4]; px[2] = in_vtx.x[15:4];
    py[0] = v[0].y[15:4]; py[1] = v[1].y[15:4]; py[2] = in_vtx.y[15:4];
    xmin = px[0]; xmax = px[0]; ymin = py[0]; ymax = py[0];
    for (int i = 1; i < 3; i++) begin
      if (px[i] < xmin) xmin = px[i];
      if (px[i] > xmax) xmax = px[i];
      if (py[i] < ymin) ymin = py[i];
      if (py[i] > ymax) ymax = py[i];
    end
    culled = (32'(xmin) >= SCREEN_W) || (32'(ymin) >= SCREEN_H);
    xmax_c = (32'(xmax) >= SCREEN_W) ? 12'(SCREEN_W - 1) : xmax;
    ymax_c = (32'(ymax) >= SCREEN_H) ? 12'(SCREEN_H - 1) : ymax;
    p.ptr[0] = v[0].ptr;
    p.ptr[1] = v[1].ptr;
    p.ptr[2] = in_vtx.ptr;
    p.tx0 = xmin[11:4];
    p.ty0 = ymin[11:4];
    p.tx1 = xmax_c[11:4];
    p.ty1 = ymax_c[11:4];
  end

  assign in_ready = !out_valid || out_ready;
  assign idle     = (cnt == 2'd0) && !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; out_valid <= 1'b0; out_prim <= '0;
      v[0] <= '0; v[1] <= '0;
      prims_in <= '0; prims_culled <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cnt == 2'd2) begin
          cnt      <= '0;
          prims_in <= prims_in + 1'b1;
          if (culled) prims_culled <= prims_culled + 1'b1;
          else begin
            out_valid <= 1'b1;
            out_prim  <= p;
          end
        end else begin
          v[cnt[0]] <= in_vtx;
          cnt       <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
