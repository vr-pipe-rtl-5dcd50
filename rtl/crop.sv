// crop: colour ROP with the early-termination alpha test.
//
// Shaded quads arrive from the shader cores on LANES lanes (the paper's ROP
// throughput is 2 quads per cycle for RGBA16F). For every covered fragment
// the colour already in the pixel (dst) is blended with the fragment (src) by
// blending_unit, f_fb(dst, src) = dst + (1 - dst.a) * src, and written back.
// alpha_test_unit then compares the old and new alpha of the pixel with
// alpha_th; pixels that have just crossed it form a termination request
// {quad coordinate, 4-bit mask} sent to ZROP.
//
// Lanes are ordered: lane 0 holds the earlier quad. When both lanes address
// the same quad in one cycle, lane 1 blends onto lane 0's result, so the
// front-to-back order of the stream is kept at full rate.
//
// The colour surface is a word per 2x2 quad (4 x 64-bit RGBA, UNORM16
// channels instead of the paper's RGBA16F), read combinationally and written
// at the clock edge: the whole read-blend-write takes one cycle. This stands
// in for the paper's 16 KB CROP cache backed by L2, which is not modelled.
// After reset, or on clear_req, a sweep zeroes the surface one word per cycle
// (clear_busy high). in_ready is low during the sweep and while ZROP cannot
// take a termination request.
//
// Interface: in_valid[LANES]/in_quad[LANES]/in_ready from the shader cores;
// term_valid/term_req/term_ready to ZROP; alpha_th, clear_req/clear_busy;
// counters and a debug read port. The coordinate fields of term_req are the
// accepted quad's own coordinates, passed through unchanged to ZROP.
// From the paper: 2 quads per cycle, blending unit followed by the alpha
// test, termination signal to ZROP. Own choices: the lane forwarding, the
// colour array in place of the CROP cache, UNORM16 colour.
module crop
  import vr_pkg::*;
#(
  parameter int unsigned SCREEN_W = 1552,
  parameter int unsigned SCREEN_H = 1040,
  parameter int unsigned LANES    = 2,
  localparam int unsigned QUADS_X = (SCREEN_W + 1) / 2,
  localparam int unsigned QUADS_Y = (SCREEN_H + 1) / 2,
  localparam int unsigned NWORDS  = QUADS_X * QUADS_Y,
  localparam int unsigned ADDR_W  = $clog2(NWORDS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            alpha_th,
  input  logic                   clear_req,
  output logic                   clear_busy,
  input  logic [LANES-1:0]       in_valid,
  input  shaded_quad_t [LANES-1:0] in_quad,
  output logic                   in_ready,
  output logic [LANES-1:0]       term_valid,
  output term_req_t [LANES-1:0]  term_req,
  input  logic                   term_ready,
  output logic [31:0]            quads_blended,
  output logic [31:0]            frags_blended,
  output logic [31:0]            pixels_terminated,
  input  logic [ADDR_W-1:0]      dbg_addr,
  output rgba_t [3:0]            dbg_data
);
  typedef rgba_t [3:0] cword_t;
  cword_t mem [NWORDS];

  logic [ADDR_W-1:0] clr_addr;
  logic              clr_active;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_active <= 1'b1;
      clr_addr   <= '0;
    end else if (clr_active) begin
      if (clr_addr == ADDR_W'(NWORDS - 1)) clr_active <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end else if (clear_req) begin
      clr_active <= 1'b1;
      clr_addr   <= '0;
    end
  end
  assign clear_busy = clr_active;

  assign in_ready = !clr_active && term_ready;

  logic [LANES-1:0][ADDR_W-1:0] addr;
  cword_t [LANES-1:0]           dst, res;
  logic [LANES-1:0][3:0]        term;
  logic [LANES-1:0]             fire;

  // Lane-parallel blend and alpha test.
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    for (genvar f = 0; f < 4; f++) begin : g_frag
      rgba_t blended;
      logic  t;
      blending_unit u_blend (.dst(dst[l][f]), .src(in_quad[l].c[f]), .out(blended));
      alpha_test_unit u_atest (.old_alpha(dst[l][f].a), .new_alpha(blended.a),
                               .alpha_th(alpha_th), .terminated(t));
      assign res[l][f]  = in_quad[l].cov[f] ? blended : dst[l][f];
      assign term[l][f] = in_quad[l].cov[f] && t;
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      addr[l] = ADDR_W'(in_quad[l].qy) * ADDR_W'(QUADS_X) + ADDR_W'(in_quad[l].qx);
      fire[l] = in_valid[l] && in_ready;
      dst[l]  = mem[addr[l]];
      // forward the result of the latest earlier lane at the same quad
      for (int k = 0; k < l; k++)
        if (fire[k] && addr[k] == addr[l]) dst[l] = res[k];
      term_valid[l]   = fire[l] && (term[l] != 4'b0);
      term_req[l].qx  = in_quad[l].qx;
      term_req[l].qy  = in_quad[l].qy;
      term_req[l].mask = term[l];
    end
  end

  always_ff @(posedge clk) begin
    if (clr_active) mem[clr_addr] <= '0;
    else
      for (int l = 0; l < LANES; l++)
        if (fire[l]) mem[addr[l]] <= res[l];   // later lanes win on equal addresses
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      quads_blended     <= '0;
      frags_blended     <= '0;
      pixels_terminated <= '0;
    end else begin
      logic [31:0] nq, nf, nt;
      nq = '0; nf = '0; nt = '0;
      for (int l = 0; l < LANES; l++) begin
        if (fire[l]) begin
          nq = nq + 1;
          nf = nf + 32'($countones(in_quad[l].cov));
          nt = nt + 32'($countones(term[l]));
        end
      end
      quads_blended     <= quads_blended + nq;
      frags_blended     <= frags_blended + nf;
      pixels_terminated <= pixels_terminated + nt;
    end
  end

  assign dbg_data = mem[dbg_addr];
endmodule
