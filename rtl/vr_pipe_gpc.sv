// vr_pipe_gpc: one SIMT cluster (GPC) of the VR-Pipe graphics pipeline, from
// shaded vertices to blended pixels, with the fixed-function units between
// the shader cores.
//
// Dataflow (shader cores, L2 and the attribute buffer are outside):
//   vertices -> vpo -> tgc_unit -> rasterizer -> tc_unit -> zrop (termination
//   test) -> qru -> warps to the shader cores
//   shaded quads from the shader cores -> crop (blend + alpha test)
//   crop termination signals -> zrop (termination update)
// The two VR-Pipe mechanisms:
//  * Hardware early termination (HET): the stencil MSB of a pixel is set
//    when its accumulated alpha first reaches alpha_th, and fragments of such
//    pixels are removed before shading. het_enable = 0 gives the baseline.
//  * Multi-granular tile binning with quad merging (QM): tile-grid bins in
//    front of the rasterizer, and the quad reorder unit that pairs
//    overlapping quads so the shader blends each pair before the ROP.
//    qm_enable = 0 keeps the binning but launches quads unpaired.
//
// Draw control: raise draw_end after the last vertex of a draw call; the
// binning units are then drained front to back and draw_done rises when
// every unit up to the warp output is empty and no termination update is
// pending. The shaded-quad input may still hold work that the shader cores
// have not returned; the caller waits for that itself. clear_req clears the
// colour and stencil surfaces (also done after reset; clear_busy meanwhile).
//
// The Hi-z write port is brought out because the depth path that would
// update it (z-test in ZROP) is not part of this design.
//
// Timing: every unit moves at most one item per cycle on valid/ready
// handshakes, except the CROP (ROP_LANES quads per cycle) and the term
// update path (one read-modify-write per cycle). The top adds no registers
// of its own.
// From the paper: the unit order, the bin sizes and counts, the 2 quads per
// cycle ROP and the 8-bit stencil. Own choices: the flush/drain control at the
// end of a draw, the enables, UNORM16 colour and the on-chip surfaces.
module vr_pipe_gpc
  import vr_pkg::*;
#(
  parameter int unsigned SCREEN_W     = 1552,
  parameter int unsigned SCREEN_H     = 1040,
  parameter int unsigned TGC_BINS     = 128,
  parameter int unsigned TGC_BIN_SIZE = 16,
  parameter int unsigned TC_BINS      = 32,
  parameter int unsigned TC_BIN_SIZE  = 128,
  parameter int unsigned TC_TIMEOUT   = 256,
  parameter int unsigned ROP_LANES    = 2,
  parameter int unsigned STENCIL_BITS = 8,
  localparam int unsigned NQUADS      = ((SCREEN_W + 1) / 2) * ((SCREEN_H + 1) / 2),
  localparam int unsigned QAW         = $clog2(NQUADS),
  localparam int unsigned NRT         = ((SCREEN_W + 7) / 8) * ((SCREEN_H + 7) / 8),
  localparam int unsigned RTW         = $clog2(NRT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          het_enable,
  input  logic                          qm_enable,
  input  logic                          hiz_enable,
  input  logic [15:0]                   alpha_th,
  input  logic                          clear_req,
  output logic                          clear_busy,
  input  logic                          draw_end,
  output logic                          draw_done,
  // shaded vertices from the shader cores
  input  logic                          vtx_valid,
  input  vertex_t                       vtx,
  output logic                          vtx_ready,
  // vertex position fetch from the attribute buffer in L2
  output logic                          vf_req_valid,
  output cbe_ptr_t                      vf_req_ptr,
  input  logic                          vf_req_ready,
  input  logic                          vf_rsp_valid,
  input  vpos_t                         vf_rsp,
  // Hi-z updates from the depth path
  input  logic                          hiz_clear,
  input  logic                          hiz_wr_valid,
  input  logic [RTW-1:0]                hiz_wr_idx,
  input  logic [15:0]                   hiz_wr_z,
  // fragment-shading warps to the shader cores, one quad slot per cycle
  output logic                          warp_valid,
  output warp_slot_t                    warp_slot,
  input  logic                          warp_ready,
  // shaded quads back from the shader cores
  input  logic [ROP_LANES-1:0]          sq_valid,
  input  shaded_quad_t [ROP_LANES-1:0]  sq,
  output logic                          sq_ready,
  // statistics and surface read-back
  output gpc_stats_t                    stats,
  input  logic [QAW-1:0]                dbg_addr,
  output rgba_t [3:0]                   dbg_color,
  output logic [3:0][STENCIL_BITS-1:0]  dbg_stencil
);
  // vpo -> tgc
  logic  p_valid, p_ready;
  prim_t p;
  // tgc -> rasterizer
  logic      g_valid, g_ready;
  tgc_prim_t g;
  // rasterizer -> tc
  logic  r_valid, r_ready;
  quad_t r;
  // tc -> zrop
  logic  t_valid, t_ready, t_last;
  quad_t t;
  // zrop -> qru
  logic     z_valid, z_ready;
  tc_quad_t z;
  // crop -> zrop
  logic [ROP_LANES-1:0]      term_valid;
  term_req_t [ROP_LANES-1:0] term_req;
  logic                      term_ready;

  logic vpo_idle, tgc_empty, rast_idle, tc_empty, qru_idle, upd_busy;
  logic z_clear_busy, c_clear_busy;

  vpo #(.SCREEN_W(SCREEN_W), .SCREEN_H(SCREEN_H)) u_vpo (
    .clk, .rst_n,
    .in_valid(vtx_valid), .in_vtx(vtx), .in_ready(vtx_ready),
    .out_valid(p_valid), .out_prim(p), .out_ready(p_ready),
    .idle(vpo_idle), .prims_in(stats.prims_in), .prims_culled(stats.prims_culled)
  );

  tgc_unit #(.NUM_BINS(TGC_BINS), .BIN_SIZE(TGC_BIN_SIZE)) u_tgc (
    .clk, .rst_n,
    .flush_all(draw_end && vpo_idle),
    .in_valid(p_valid), .in_prim(p), .in_ready(p_ready),
    .out_valid(g_valid), .out_prim(g), .out_ready(g_ready),
    .empty(tgc_empty),
    .flush_full(stats.tgc_flush_full), .flush_evict(stats.tgc_flush_evict),
    .flush_drain(stats.tgc_flush_drain), .grid_inserts(stats.tgc_grid_inserts)
  );

  rasterizer #(.SCREEN_W(SCREEN_W), .SCREEN_H(SCREEN_H)) u_rast (
    .clk, .rst_n,
    .hiz_enable, .hiz_clear, .hiz_wr_valid, .hiz_wr_idx, .hiz_wr_z,
    .in_valid(g_valid), .in_prim(g), .in_ready(g_ready),
    .vf_req_valid, .vf_req_ptr, .vf_req_ready, .vf_rsp_valid, .vf_rsp,
    .out_valid(r_valid), .out_quad(r), .out_ready(r_ready),
    .idle(rast_idle), .rtiles_tested(stats.rtiles_tested),
    .rtiles_hiz_culled(stats.rtiles_hiz_culled), .quads_out(stats.quads_rastered)
  );

  tc_unit #(.NUM_BINS(TC_BINS), .BIN_SIZE(TC_BIN_SIZE), .TIMEOUT(TC_TIMEOUT)) u_tc (
    .clk, .rst_n,
    .flush_all(draw_end && vpo_idle && tgc_empty && !g_valid && rast_idle),
    .in_valid(r_valid), .in_quad(r), .in_ready(r_ready),
    .out_valid(t_valid), .out_quad(t), .out_last(t_last), .out_ready(t_ready),
    .empty(tc_empty),
    .flush_full(stats.tc_flush_full), .flush_evict(stats.tc_flush_evict),
    .flush_timeout(stats.tc_flush_timeout), .flush_drain(stats.tc_flush_drain)
  );

  zrop #(.SCREEN_W(SCREEN_W), .SCREEN_H(SCREEN_H), .STENCIL_BITS(STENCIL_BITS),
         .LANES(ROP_LANES)) u_zrop (
    .clk, .rst_n, .het_enable, .clear_req, .clear_busy(z_clear_busy),
    .in_valid(t_valid), .in_quad(t), .in_last(t_last), .in_ready(t_ready),
    .out_valid(z_valid), .out(z), .out_ready(z_ready),
    .term_valid, .term_req, .term_ready, .update_busy(upd_busy),
    .quads_dropped(stats.quads_terminated), .frags_discarded(stats.frags_terminated),
    .dbg_addr, .dbg_data(dbg_stencil)
  );

  qru u_qru (
    .clk, .rst_n, .qm_enable,
    .in_valid(z_valid), .in(z), .in_ready(z_ready),
    .out_valid(warp_valid), .out(warp_slot), .out_ready(warp_ready),
    .idle(qru_idle), .pairs_found(stats.merge_pairs), .warps_sent(stats.warps_launched)
  );

  crop #(.SCREEN_W(SCREEN_W), .SCREEN_H(SCREEN_H), .LANES(ROP_LANES)) u_crop (
    .clk, .rst_n, .alpha_th, .clear_req, .clear_busy(c_clear_busy),
    .in_valid(sq_valid), .in_quad(sq), .in_ready(sq_ready),
    .term_valid, .term_req, .term_ready,
    .quads_blended(stats.quads_blended), .frags_blended(stats.frags_blended),
    .pixels_terminated(stats.pixels_terminated),
    .dbg_addr, .dbg_data(dbg_color)
  );

  assign clear_busy = z_clear_busy || c_clear_busy;
  assign draw_done  = draw_end && vpo_idle && tgc_empty && !g_valid && rast_idle &&
                      tc_empty && !t_valid && !z_valid && qru_idle && !upd_busy;
endmodule
