// rasterizer: setup, coarse raster, hierarchical-z test and fine raster for
// the primitives of a flushed tile-grid bin.
//
// For every primitive taken from the TGC unit:
//  * Fetch: the positions of its three vertices are read from the attribute
//    buffer through the vertex fetch port (three requests, in-order responses).
//  * Setup: edge equations E_k(x, y) = A_k x + B_k y + C_k of the three edges
//    in 12.4 fixed point; the edges are flipped when the triangle is wound
//    clockwise, degenerate (zero-area) triangles are dropped. The raster-tile
//    range is the primitive's pixel bounding box cut to its tile grid
//    (GRID_PX x GRID_PX pixels) and to the screen.
//  * Coarse raster: each 8x8-pixel raster tile of the range is tested against
//    the three edges at the tile corner where each edge function is largest;
//    the tile is skipped when any edge is negative there.
//  * Hi-z: a surviving tile is skipped when hiz_enable is set, the tile has a
//    recorded far depth and the primitive's nearest vertex depth is larger
//    (smaller z = nearer). The Hi-z store is written through hiz_wr_* by the
//    depth path, which this design does not include; hiz_clear forgets it.
//  * Fine raster: the 16 quads of the raster tile are visited in turn; pixel
//    centres (X + 0.5, Y + 0.5) are tested against the edges with a top-left
//    style tie rule (E > 0, or E = 0 on an edge with A > 0 or A = 0, B > 0),
//    so pixels on an edge shared by two triangles are drawn once. A quad with
//    at least one covered pixel is emitted with its coverage mask and the
//    attribute pointer of the primitive's first vertex.
// The paper names the four steps and their granularities; the arithmetic,
// the tie rule and the one-quad-per-cycle visiting order are this design's.
// Timing: about 3 cycles of fetch plus 1 setup cycle per primitive, 1 cycle
// per raster tile tested and 16 cycles per raster tile that passes.
module rasterizer
  import vr_pkg::*;
#(
  parameter int unsigned SCREEN_W = 1552,
  parameter int unsigned SCREEN_H = 1040,
  parameter int unsigned GRID_PX  = 64,      // tile grid edge (4 tiles of 16)
  localparam int unsigned RT_X    = (SCREEN_W + 7) / 8,
  localparam int unsigned RT_Y    = (SCREEN_H + 7) / 8,
  localparam int unsigned NRT     = RT_X * RT_Y,
  localparam int unsigned RTW     = $clog2(NRT)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            hiz_enable,
  input  logic            hiz_clear,
  input  logic            hiz_wr_valid,
  input  logic [RTW-1:0]  hiz_wr_idx,
  input  logic [15:0]     hiz_wr_z,
  // primitives from the TGC unit
  input  logic            in_valid,
  input  tgc_prim_t       in_prim,
  output logic            in_ready,
  // vertex position fetch
  output logic            vf_req_valid,
  output cbe_ptr_t        vf_req_ptr,
  input  logic            vf_req_ready,
  input  logic            vf_rsp_valid,
  input  vpos_t           vf_rsp,
  // quads to the TC unit
  output logic            out_valid,
  output quad_t           out_quad,
  input  logic            out_ready,
  output logic            idle,
  output logic [31:0]     rtiles_tested,
  output logic [31:0]     rtiles_hiz_culled,
  output logic [31:0]     quads_out
);
  typedef enum logic [2:0] {IDLE, FETCH, SETUP, COARSE, FINE} state_t;
  state_t state;

  tgc_prim_t  prim;
  vpos_t      vp [3];
  logic [1:0] nreq, nrsp;

  typedef logic signed [47:0] e_t;
  e_t A [3], B [3], C [3];

  // ---------------- setup (combinational on the fetched vertices) -------------
  e_t   sa [3], sb [3], sc [3];
  e_t   area2;
  logic [11:0] bx0, bx1, by0, by1;    // pixel bounding box cut to grid and screen
  logic [15:0] zmin;
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      int a, b;
      a = (k + 1) % 3;
      b = (k + 2) % 3;
      sa[k] = e_t'(signed'({1'b0, vp[a].y})) - e_t'(signed'({1'b0, vp[b].y}));
      sb[k] = e_t'(signed'({1'b0, vp[b].x})) - e_t'(signed'({1'b0, vp[a].x}));
      sc[k] = e_t'(signed'({1'b0, vp[a].x})) * e_t'(signed'({1'b0, vp[b].y}))
            - e_t'(signed'({1'b0, vp[b].x})) * e_t'(signed'({1'b0, vp[a].y}));
    end
    area2 = sa[0] * e_t'(signed'({1'b0, vp[0].x})) + sb[0] * e_t'(signed'({1'b0, vp[0].y})) + sc[0];
    begin
      logic [11:0] xlo, xhi, ylo, yhi, gx0, gy0;
      xlo = vp[0].x[15:4]; xhi = xlo; ylo = vp[0].y[15:4]; yhi = ylo;
      zmin = vp[0].z;
      for (int i = 1; i < 3; i++) begin
        if (vp[i].x[15:4] < xlo) xlo = vp[i].x[15:4];
        if (vp[i].x[15:4] > xhi) xhi = vp[i].x[15:4];
        if (vp[i].y[15:4] < ylo) ylo = vp[i].y[15:4];
        if (vp[i].y[15:4] > yhi) yhi = vp[i].y[15:4];
        if (vp[i].z < zmin) zmin = vp[i].z;
      end
      gx0 = 12'(32'(prim.gid.gx) * GRID_PX);
      gy0 = 12'(32'(prim.gid.gy) * GRID_PX);
      bx0 = (xlo > gx0) ? xlo : gx0;
      by0 = (ylo > gy0) ? ylo : gy0;
      bx1 = (xhi < gx0 + 12'(GRID_PX - 1)) ? xhi : gx0 + 12'(GRID_PX - 1);
      by1 = (yhi < gy0 + 12'(GRID_PX - 1)) ? yhi : gy0 + 12'(GRID_PX - 1);
      if (32'(bx1) > SCREEN_W - 1) bx1 = 12'(SCREEN_W - 1);
      if (32'(by1) > SCREEN_H - 1) by1 = 12'(SCREEN_H - 1);
    end
  end

  // ---------------- raster tile walk ----------------
  logic [8:0] rtx, rty, rtx0, rtx1, rty1;   // raster tile coordinates
  logic [3:0] fq;                           // quad within raster tile
  logic [15:0] pzmin;

  // coarse test at the best corner of each edge
  logic coarse_pass, hiz_pass;
  logic [RTW-1:0] rt_idx;
  logic [15:0]    hiz_z [NRT];
  logic [NRT-1:0] hiz_v;
  always_comb begin
    e_t cx_lo, cx_hi, cy_lo, cy_hi, e;
    cx_lo = e_t'({rtx, 3'b000, 4'b1000});          // (8*rtx + 0.5) * 16
    cx_hi = cx_lo + e_t'(7 * 16);
    cy_lo = e_t'({rty, 3'b000, 4'b1000});
    cy_hi = cy_lo + e_t'(7 * 16);
    coarse_pass = 1'b1;
    for (int k = 0; k < 3; k++) begin
      e = A[k] * ((A[k] > 0) ? cx_hi : cx_lo) + B[k] * ((B[k] > 0) ? cy_hi : cy_lo) + C[k];
      if (e < 0) coarse_pass = 1'b0;
    end
    rt_idx   = RTW'(32'(rty) * RT_X + 32'(rtx));
    hiz_pass = !hiz_enable || !hiz_v[rt_idx] || (pzmin <= hiz_z[rt_idx]);
  end

  // fine test of the four pixels of quad fq
  logic [3:0] cov;
  logic [11:0] qpx, qpy;     // pixel of the quad's top-left fragment
  always_comb begin
    qpx = {rtx, fq[1:0], 1'b0};
    qpy = {rty, fq[3:2], 1'b0};
    for (int f = 0; f < 4; f++) begin
      logic [11:0] X, Y;
      logic hit;
      e_t px, py, e;
      X = qpx + 12'(f & 1);
      Y = qpy + 12'(f >> 1);
      px = e_t'({X, 4'b1000});
      py = e_t'({Y, 4'b1000});
      hit = (32'(X) < SCREEN_W) && (32'(Y) < SCREEN_H);
      for (int k = 0; k < 3; k++) begin
        e = A[k] * px + B[k] * py + C[k];
        if (!(e > 0 || (e == 0 && (A[k] > 0 || (A[k] == 0 && B[k] > 0))))) hit = 1'b0;
      end
      cov[f] = hit;
    end
  end

  assign in_ready     = (state == IDLE);
  assign idle         = (state == IDLE);
  assign vf_req_valid = (state == FETCH) && (nreq != 2'd3);
  assign vf_req_ptr   = prim.ptr[nreq];
  assign out_valid    = (state == FINE) && (cov != 4'b0000);
  assign out_quad.tx  = qpx[11:4];
  assign out_quad.ty  = qpy[11:4];
  assign out_quad.qx  = qpx[3:1];
  assign out_quad.qy  = qpy[3:1];
  assign out_quad.cov = cov;
  assign out_quad.ptr = prim.ptr[0];

  // advance to the next raster tile of the range, or finish the primitive
  function automatic logic last_tile(input logic [8:0] x, input logic [8:0] y,
                                     input logic [8:0] x1, input logic [8:0] y1);
    return (x == x1) && (y == y1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; nreq <= '0; nrsp <= '0; prim <= '0;
      rtx <= '0; rty <= '0; rtx0 <= '0; rtx1 <= '0; rty1 <= '0; fq <= '0; pzmin <= '0;
      for (int k = 0; k < 3; k++) begin A[k] <= '0; B[k] <= '0; C[k] <= '0; vp[k] <= '0; end
      hiz_v <= '0;
      rtiles_tested <= '0; rtiles_hiz_culled <= '0; quads_out <= '0;
    end else begin
      if (hiz_clear) hiz_v <= '0;
      else if (hiz_wr_valid) hiz_v[hiz_wr_idx] <= 1'b1;

      case (state)
        IDLE: if (in_valid) begin
          prim  <= in_prim;
          nreq  <= '0;
          nrsp  <= '0;
          state <= FETCH;
        end
        FETCH: begin
          if (vf_req_valid && vf_req_ready) nreq <= nreq + 1'b1;
          if (vf_rsp_valid) begin
            vp[nrsp] <= vf_rsp;
            nrsp     <= nrsp + 1'b1;
            if (nrsp == 2'd2) state <= SETUP;
          end
        end
        SETUP: begin
          for (int k = 0; k < 3; k++) begin
            A[k] <= (area2 < 0) ? -sa[k] : sa[k];
            B[k] <= (area2 < 0) ? -sb[k] : sb[k];
            C[k] <= (area2 < 0) ? -sc[k] : sc[k];
          end
          pzmin <= zmin;
          rtx0  <= 9'(bx0 >> 3);
          rtx   <= 9'(bx0 >> 3);
          rty   <= 9'(by0 >> 3);
          rtx1  <= 9'(bx1 >> 3);
          rty1  <= 9'(by1 >> 3);
          if (area2 == 0 || bx0 > bx1 || by0 > by1) state <= IDLE;
          else state <= COARSE;
        end
        COARSE: begin
          rtiles_tested <= rtiles_tested + 1'b1;
          if (coarse_pass && hiz_pass) begin
            fq    <= '0;
            state <= FINE;
          end else begin
            if (coarse_pass) rtiles_hiz_culled <= rtiles_hiz_culled + 1'b1;
            if (last_tile(rtx, rty, rtx1, rty1)) state <= IDLE;
            else if (rtx == rtx1) begin rtx <= rtx0; rty <= rty + 1'b1; end
            else rtx <= rtx + 1'b1;
          end
        end
        FINE: if (!out_valid || out_ready) begin
          if (out_valid) quads_out <= quads_out + 1'b1;
          fq <= fq + 1'b1;
          if (fq == 4'd15) begin
            if (last_tile(rtx, rty, rtx1, rty1)) state <= IDLE;
            else begin
              state <= COARSE;
              if (rtx == rtx1) begin rtx <= rtx0; rty <= rty + 1'b1; end
              else rtx <= rtx + 1'b1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) if (hiz_wr_valid) hiz_z[hiz_wr_idx] <= hiz_wr_z;
endmodule
