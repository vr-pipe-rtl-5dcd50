// term_update_unit: sets the termination bit of newly terminated pixels.
//
// The colour ROP's alpha tests send, per quad, a mask of pixels that have just
// reached the termination threshold. Requests from up to LANES quads per cycle
// enter a small FIFO. One request per cycle is then applied: the address unit
// turns the quad coordinate into a stencil-surface word address
// (qy * QUADS_X + qx), the word is read, the termination bit
// 1 << (STENCIL_BITS-1) is ORed into the masked pixels and the word is written
// back in the same cycle (read-modify-write on a combinationally read
// surface). The FIFO depth and the one-update-per-cycle rate are this design's
// choices; the paper gives the load / OR / store sequence.
//
// Interface: req_valid[LANES] with a shared req_ready (ready means room for
// LANES requests); stencil read port st_raddr/st_rdata and write port
// st_we/st_waddr/st_wdata. busy is high while requests are pending.
module term_update_unit
  import vr_pkg::*;
#(
  parameter int unsigned STENCIL_BITS = 8,
  parameter int unsigned QUADS_X      = 776,   // quads per screen row (1552 / 2)
  parameter int unsigned ADDR_W       = 19,
  parameter int unsigned LANES        = 2,
  parameter int unsigned FIFO_DEPTH   = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [LANES-1:0]              req_valid,
  input  term_req_t [LANES-1:0]         req,
  output logic                          req_ready,
  output logic [ADDR_W-1:0]             st_raddr,
  input  logic [3:0][STENCIL_BITS-1:0]  st_rdata,
  output logic                          st_we,
  output logic [ADDR_W-1:0]             st_waddr,
  output logic [3:0][STENCIL_BITS-1:0]  st_wdata,
  output logic                          busy
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);
  localparam logic [STENCIL_BITS-1:0] TERM_BIT = 1 << (STENCIL_BITS - 1);

  term_req_t          fifo [FIFO_DEPTH];
  logic [PW-1:0]      wr_ptr, rd_ptr;
  logic [PW:0]        count;
  logic [PW:0]        n_push;
  logic               pop;
  term_req_t          head;

  assign req_ready = (count <= (PW+1)'(FIFO_DEPTH - LANES));
  assign pop       = (count != 0);
  assign head      = fifo[rd_ptr];
  assign busy      = (count != 0);

  always_comb begin
    n_push = '0;
    for (int l = 0; l < LANES; l++) if (req_valid[l] && req_ready) n_push++;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      logic [PW-1:0] w;
      w = wr_ptr;
      if (req_ready) begin
        for (int l = 0; l < LANES; l++) begin
          if (req_valid[l]) begin
            fifo[w] <= req[l];
            w = w + 1'b1;
          end
        end
      end
      wr_ptr <= w;
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + n_push - (PW+1)'(pop);
    end
  end

  // Address calculation and the OR with the termination bit.
  always_comb begin
    st_raddr = ADDR_W'(head.qy) * ADDR_W'(QUADS_X) + ADDR_W'(head.qx);
    st_waddr = st_raddr;
    st_we    = pop;
    for (int i = 0; i < 4; i++)
      st_wdata[i] = head.mask[i] ? (st_rdata[i] | TERM_BIT) : st_rdata[i];
  end

  initial begin
    assert (FIFO_DEPTH >= LANES && (1 << PW) == FIFO_DEPTH)
      else $error("FIFO_DEPTH must be a power of two and at least LANES");
  end
endmodule
