// vr_pkg: types, sizes and arithmetic shared by the VR-Pipe cluster pipeline.
//
// Geometry follows the paper's cluster: 16x16-pixel screen tiles, 8x8-pixel
// raster tiles, 2x2-pixel quads and 4x4-tile grids (64x64 pixels). Vertex
// screen coordinates are unsigned 12.4 fixed point (this design's choice), so
// the screen can be up to 4096x4096 pixels.
//
// Colour: the paper's surface format is RGBA16F. This design keeps 64 bits per
// pixel but stores each channel as UNORM16 (0..65535 = 0.0..1.0), so that
// blending is integer arithmetic. Colours are pre-multiplied by alpha, as in
// the paper's front-to-back blend f_fb(c1, c2) = c1 + (1 - a1) * c2.
//
// Interface: a package (types, constants and functions); no timing of its own.
package vr_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned TILE_PX      = 16;  // screen tile edge, pixels
  localparam int unsigned RTILE_PX     = 8;   // raster tile edge, pixels
  localparam int unsigned QUADS_PER_TILE_EDGE = TILE_PX / 2;  // 8
  localparam int unsigned SUBPIX_BITS  = 4;   // 12.4 fixed point

  typedef logic [15:0] coord_t;   // 12.4 fixed point screen coordinate
  typedef logic [31:0] cbe_ptr_t; // pointer to vertex attributes in the circular buffer

  // A vertex as written by vertex shading: screen position, depth and the
  // pointer to its attribute record.
  typedef struct packed {
    coord_t   x;
    coord_t   y;
    logic [15:0] z;
    cbe_ptr_t ptr;
  } vertex_t;

  // Position part of a vertex, as returned by an attribute fetch.
  typedef struct packed {
    coord_t   x;
    coord_t   y;
    logic [15:0] z;
  } vpos_t;

  // A primitive leaving the VPO: three attribute pointers and the inclusive
  // bounding box in screen-tile units.
  typedef struct packed {
    cbe_ptr_t [2:0] ptr;
    logic [7:0] tx0, ty0, tx1, ty1;
  } prim_t;

  // 2-byte tile grid ID: {grid y, grid x}.
  typedef struct packed {
    logic [7:0] gy;
    logic [7:0] gx;
  } grid_id_t;

  // A primitive leaving a flushed TGC bin.
  typedef struct packed {
    cbe_ptr_t [2:0] ptr;
    grid_id_t gid;
    logic     last;     // last primitive of this bin flush
  } tgc_prim_t;

  // A 2x2 quad leaving fine raster. cov bit order: 0=(x,y) 1=(x+1,y) 2=(x,y+1) 3=(x+1,y+1).
  typedef struct packed {
    logic [7:0] tx;     // screen tile x
    logic [7:0] ty;     // screen tile y
    logic [2:0] qx;     // quad column inside the tile
    logic [2:0] qy;     // quad row inside the tile
    logic [3:0] cov;
    cbe_ptr_t   ptr;    // attribute pointer of the provoking vertex
  } quad_t;

  // A quad leaving a flushed TC bin (through the termination test).
  typedef struct packed {
    quad_t q;
    logic  last;        // last quad of this bin flush
    logic  bubble;      // carries only 'last'; the quad itself was discarded
  } tc_quad_t;

  // One quad slot of a fragment-shading warp (8 quads = 32 threads).
  typedef struct packed {
    quad_t q;
    logic  merge;       // quad is half of a merge pair (even slot = front, odd = back)
    logic  warp_last;   // last quad of this warp
  } warp_slot_t;

  localparam int unsigned QUADS_PER_WARP = 8;

  // ---------------- colour ----------------
  typedef struct packed {
    logic [15:0] r, g, b, a;
  } rgba_t;

  // A shaded quad returned by the shader cores to the colour ROP.
  typedef struct packed {
    logic [10:0] qx;    // quad column on the screen
    logic [10:0] qy;    // quad row on the screen
    logic [3:0]  cov;
    rgba_t [3:0] c;     // pre-multiplied colour per fragment
  } shaded_quad_t;

  // Newly terminated pixels of one quad, sent from the alpha test to ZROP.
  typedef struct packed {
    logic [10:0] qx;
    logic [10:0] qy;
    logic [3:0]  mask;
  } term_req_t;

  // Event counters of one cluster, for performance analysis and testing.
  typedef struct packed {
    logic [31:0] prims_in;           // triangles assembled by the VPO
    logic [31:0] prims_culled;       // triangles dropped off screen
    logic [31:0] tgc_grid_inserts;   // primitive-to-grid insertions
    logic [31:0] tgc_flush_full;
    logic [31:0] tgc_flush_evict;
    logic [31:0] tgc_flush_drain;
    logic [31:0] rtiles_tested;      // coarse raster tiles examined
    logic [31:0] rtiles_hiz_culled;
    logic [31:0] quads_rastered;
    logic [31:0] tc_flush_full;
    logic [31:0] tc_flush_evict;
    logic [31:0] tc_flush_timeout;
    logic [31:0] tc_flush_drain;
    logic [31:0] quads_terminated;   // quads dropped by the termination test
    logic [31:0] frags_terminated;   // fragments removed by the termination test
    logic [31:0] merge_pairs;        // quad pairs flagged for merging
    logic [31:0] warps_launched;
    logic [31:0] quads_blended;      // quads blended by the colour ROP
    logic [31:0] frags_blended;
    logic [31:0] pixels_terminated;  // termination updates sent to ZROP
  } gpc_stats_t;

  // alpha >= 0.996 in UNORM16: ceil(0.996 * 65535) = 65273
  localparam logic [15:0] ALPHA_TH_DEFAULT = 16'd65273;

  // Rounded x*y/65535 for 16-bit x, y: t = x*y + 2^15, (t + (t >> 16)) >> 16.
  function automatic logic [15:0] unorm_mul(input logic [15:0] x, input logic [15:0] y);
    logic [31:0] t;
    logic [32:0] s;
    t = 32'(x) * 32'(y) + 32'h8000;
    s = 33'(t) + 33'(t >> 16);
    return s[31:16];
  endfunction

  // Saturating UNORM16 add.
  function automatic logic [15:0] unorm_add(input logic [15:0] x, input logic [15:0] y);
    logic [16:0] s;
    s = 17'(x) + 17'(y);
    return s[16] ? 16'hFFFF : s[15:0];
  endfunction

  // Front-to-back blend of pre-multiplied colours: front + (1 - front.a) * back.
  function automatic rgba_t f_fb(input rgba_t front, input rgba_t back);
    rgba_t o;
    logic [15:0] t;
    t   = ~front.a;  // 65535 - a
    o.r = unorm_add(front.r, unorm_mul(t, back.r));
    o.g = unorm_add(front.g, unorm_mul(t, back.g));
    o.b = unorm_add(front.b, unorm_mul(t, back.b));
    o.a = unorm_add(front.a, unorm_mul(t, back.a));
    return o;
  endfunction

endpackage
