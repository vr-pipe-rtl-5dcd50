// tb_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL: colour blending with plain integer division and triangle
// coverage by direct evaluation of the three edge cross products.
//
// Interface: a package of functions used by the testbenches; no timing.
package tb_ref_pkg;
  import vr_pkg::*;

  // round-half-up of x*y/65535
  function automatic int unsigned ref_mul(input int unsigned x, input int unsigned y);
    longint unsigned p;
    p = longint'(x) * longint'(y);
    return int'((2 * p + 65535) / 131070);
  endfunction

  function automatic int unsigned sat16(input int unsigned v);
    return (v > 65535) ? 65535 : v;
  endfunction

  function automatic rgba_t ref_blend(input rgba_t f, input rgba_t b);
    rgba_t o;
    int unsigned t;
    t = 65535 - int'(f.a);
    o.r = 16'(sat16(int'(f.r) + ref_mul(t, int'(b.r))));
    o.g = 16'(sat16(int'(f.g) + ref_mul(t, int'(b.g))));
    o.b = 16'(sat16(int'(f.b) + ref_mul(t, int'(b.b))));
    o.a = 16'(sat16(int'(f.a) + ref_mul(t, int'(b.a))));
    return o;
  endfunction

  // Does triangle (x,y in 12.4) cover the centre of pixel (px, py)?
  // cross((b-a),(p-a)) for each edge, orientation made positive, ties
  // resolved towards edges whose normal points to +x, or +y when vertical.
  function automatic bit ref_covers(input vertex_t v0, input vertex_t v1, input vertex_t v2,
                                    input int px, input int py);
    longint x[3], y[3], cx, cy, area, e, nx, ny;
    x[0] = v0.x; x[1] = v1.x; x[2] = v2.x;
    y[0] = v0.y; y[1] = v1.y; y[2] = v2.y;
    cx = px * 16 + 8;
    cy = py * 16 + 8;
    area = (x[1] - x[0]) * (y[2] - y[0]) - (y[1] - y[0]) * (x[2] - x[0]);
    if (area == 0) return 0;
    for (int k = 0; k < 3; k++) begin
      int a, b;
      a = (k + 1) % 3; b = (k + 2) % 3;
      // edge a->b; left-hand normal (y_a - y_b, x_b - x_a)
      nx = y[a] - y[b];
      ny = x[b] - x[a];
      e  = nx * (cx - x[a]) + ny * (cy - y[a]);
      if (area < 0) begin e = -e; nx = -nx; ny = -ny; end
      if (e < 0) return 0;
      if (e == 0 && !(nx > 0 || (nx == 0 && ny > 0))) return 0;
    end
    return 1;
  endfunction

  // Fragment colour produced by the test fragment shader for the primitive
  // whose attribute pointer is ptr, at pixel (x, y): a colour and an opacity
  // taken from the pointer, and an alpha that falls off with a pseudo-random
  // per-pixel factor (standing in for the Gaussian), pre-multiplied.
  function automatic rgba_t frag_color(input cbe_ptr_t ptr, input int x, input int y);
    rgba_t c;
    int unsigned op, fall, a;
    op   = 20000 + (ptr[15:0] % 40000);                 // opacity 0.30 .. 0.92
    fall = ((x * 7 + y * 13 + int'(ptr[23:16])) % 16);  // 0 .. 15
    a    = (fall == 0) ? 100 : op * (16 - fall / 2) / 16;   // 100 < 1/255: pruned
    c.a  = 16'(a);
    c.r  = 16'(ref_mul({24'd0, ptr[31:24]} * 257, a));
    c.g  = 16'(ref_mul({24'd0, ptr[23:16]} * 257, a));
    c.b  = 16'(ref_mul({24'd0, ptr[7:0]} * 257, a));
    return c;
  endfunction

  // alpha pruning threshold of the fragment shader: alpha < 1/255
  localparam int unsigned PRUNE_TH = 257;
endpackage
