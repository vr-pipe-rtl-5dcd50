// zrop: depth-stencil ROP reduced to the part VR-Pipe extends, the stencil
// surface with early termination.
//
// The stencil surface holds STENCIL_BITS per pixel, stored one 2x2 quad per
// word (address qy * QUADS_X + qx). Its MSB is the termination flag.
//  * Termination test: quads flushed from the tile coalescing unit pass
//    through term_test_unit, one per cycle, before fragment shading.
//    Fragments of terminated pixels are removed; a quad with none left is
//    dropped. When a dropped quad carried the 'last' marker of its bin flush,
//    the marker is still forwarded as a bubble so the quad reorder unit sees
//    the end of the batch.
//  * Termination update: term_update_unit applies termination signals from
//    the colour ROP (read, OR the flag, write back).
//  * Clear: after reset, or on clear_req, a sweep writes zero to every word,
//    one per cycle (the frame's "stencils <- 0"); clear_busy is high meanwhile
//    and the test stage accepts nothing.
// The z-test and the ordinary stencil test of a full ZROP are not part of
// this module. Timing: the test stage is a one-entry valid/ready pipeline
// register (one cycle of latency, one quad per cycle). dbg_addr/dbg_data read
// the surface for inspection.
//
// Interface: in_valid/in_quad/in_ready from the TC unit, out_valid/out_quad/
// out_ready to the QRU, LANES termination request ports from the CROP,
// het_enable, clear_req/clear_busy, drop counters and a debug read port.
// From the paper: the MSB termination bit, the test after the TC flush, the
// read-OR-write update. Own choices: the stencil array standing in for the
// z-cache, the clear sweep and the bubble that carries a dropped 'last'.
module zrop
  import vr_pkg::*;
#(
  parameter int unsigned SCREEN_W     = 1552,
  parameter int unsigned SCREEN_H     = 1040,
  parameter int unsigned STENCIL_BITS = 8,
  parameter int unsigned LANES        = 2,
  localparam int unsigned QUADS_X     = (SCREEN_W + 1) / 2,
  localparam int unsigned QUADS_Y     = (SCREEN_H + 1) / 2,
  localparam int unsigned NWORDS      = QUADS_X * QUADS_Y,
  localparam int unsigned ADDR_W      = $clog2(NWORDS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         het_enable,
  input  logic                         clear_req,
  output logic                         clear_busy,
  // quads from the tile coalescing unit
  input  logic                         in_valid,
  input  quad_t                        in_quad,
  input  logic                         in_last,
  output logic                         in_ready,
  // surviving quads to the quad reorder unit
  output logic                         out_valid,
  output tc_quad_t                     out,
  input  logic                         out_ready,
  // termination signals from the colour ROP
  input  logic [LANES-1:0]             term_valid,
  input  term_req_t [LANES-1:0]        term_req,
  output logic                         term_ready,
  output logic                         update_busy,
  // statistics and inspection
  output logic [31:0]                  quads_dropped,
  output logic [31:0]                  frags_discarded,
  input  logic [ADDR_W-1:0]            dbg_addr,
  output logic [3:0][STENCIL_BITS-1:0] dbg_data
);
  typedef logic [3:0][STENCIL_BITS-1:0] sword_t;
  sword_t mem [NWORDS];

  // ---------------- clear sweep ----------------
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

  // ---------------- termination update ----------------
  logic [ADDR_W-1:0] up_raddr, up_waddr;
  sword_t            up_wdata;
  logic              up_we;
  logic [LANES-1:0]  term_valid_g;
  logic              up_ready;
  assign term_valid_g = clr_active ? '0 : term_valid;
  assign term_ready   = up_ready && !clr_active;

  term_update_unit #(
    .STENCIL_BITS(STENCIL_BITS), .QUADS_X(QUADS_X), .ADDR_W(ADDR_W), .LANES(LANES)
  ) u_update (
    .clk, .rst_n,
    .req_valid(term_valid_g), .req(term_req), .req_ready(up_ready),
    .st_raddr(up_raddr), .st_rdata(mem[up_raddr]),
    .st_we(up_we), .st_waddr(up_waddr), .st_wdata(up_wdata),
    .busy(update_busy)
  );

  always_ff @(posedge clk) begin
    if (clr_active)  mem[clr_addr] <= '0;
    else if (up_we)  mem[up_waddr] <= up_wdata;
  end

  // ---------------- termination test ----------------
  logic [10:0]       sqx, sqy;
  logic [ADDR_W-1:0] t_addr;
  logic [3:0]        cov_out;
  logic              discard;
  assign sqx    = {in_quad.tx, in_quad.qx};
  assign sqy    = {in_quad.ty, in_quad.qy};
  assign t_addr = ADDR_W'(sqy) * ADDR_W'(QUADS_X) + ADDR_W'(sqx);

  term_test_unit #(.STENCIL_BITS(STENCIL_BITS)) u_test (
    .enable(het_enable), .cov_in(in_quad.cov), .stencil(mem[t_addr]),
    .cov_out, .discard
  );

  assign in_ready = !clr_active && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid       <= 1'b0;
      out             <= '0;
      quads_dropped   <= '0;
      frags_discarded <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        frags_discarded <= frags_discarded + 32'($countones(in_quad.cov & ~cov_out));
        if (discard) quads_dropped <= quads_dropped + 1'b1;
        if (!discard || in_last) begin
          out_valid    <= 1'b1;
          out.q        <= in_quad;
          out.q.cov    <= cov_out;
          out.last     <= in_last;
          out.bubble   <= discard;
        end
      end
    end
  end

  assign dbg_data = mem[dbg_addr];
endmodule
