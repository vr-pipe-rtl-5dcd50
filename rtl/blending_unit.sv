// blending_unit: the colour ROP's per-fragment blender for volume rendering.
//
// It computes the front-to-back blend of pre-multiplied colours used by the
// paper, f_fb(dst, src) = dst + (1 - dst.a) * src, where dst is the colour
// already accumulated in the pixel (everything in front) and src is the
// incoming fragment (behind it). Each channel is UNORM16; products are rounded
// to nearest and sums saturate at 1.0. The paper's surface format is RGBA16F;
// the fixed-point channel format is this design's choice.
//
// Interface: purely combinational; dst and src in, the blended colour out.
// dst.a and out.a are the old and new alpha that the alpha test compares.
module blending_unit
  import vr_pkg::*;
(
  input  rgba_t dst,
  input  rgba_t src,
  output rgba_t out
);
  always_comb out = f_fb(dst, src);
endmodule
