// qru: quad reorder unit in the PROP (VR-Pipe extension).
//
// It receives the quads of one flushed TC bin (all from the same screen tile)
// after the termination test, stores them with quad IDs 0..n-1 (up to
// MAX_QUADS = 128), and then builds fragment-shading warps of QUADS_PER_WARP
// quads (8 quads = 32 threads) in two passes:
//   1. Pair pass: the quads are examined in QID order. A table of 64
//      registers {valid, QID}, one per quad position (0,0)..(7,7) of the tile,
//      remembers the last unpaired quad seen at each position. When a quad
//      finds its position's register valid, the two overlap: the earlier quad
//      is emitted at an even warp slot and the later one right after it, both
//      with the merge flag, their bits are set in the 128-bit merge bitmap and
//      the register is cleared (so a third quad at the position starts a new
//      pair; the paper does not say what happens to the register after a
//      pair, this is this design's choice).
//   2. Fill pass: quads whose bitmap bit is clear are emitted in QID order
//      without the merge flag.
// The two passes write a launch-order list (QID and merge flag per slot),
// which is then streamed out; building the list first lets the unit close
// the last warp of a batch correctly.
// Every quad left unpaired is the last one at its position, so blending the
// pairs first and the single quads afterwards keeps each pixel's
// front-to-back order. The shader merges slot 2n into slot 2n+1 by warp
// shuffle. With qm_enable low the pair pass is skipped (baseline order).
//
// Interface: quads in on a valid/ready port (in.last closes a batch; a bubble
// carries only 'last'); warp slots out on a valid/ready port, one per cycle,
// with warp_last on the 8th slot of a warp and on the final slot of a batch.
// The unit takes no new batch until the current one has been emitted.
module qru
  import vr_pkg::*;
#(
  parameter int unsigned MAX_QUADS = 128,
  localparam int unsigned QW = $clog2(MAX_QUADS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        qm_enable,
  input  logic        in_valid,
  input  tc_quad_t    in,
  output logic        in_ready,
  output logic        out_valid,
  output warp_slot_t  out,
  input  logic        out_ready,
  output logic        idle,
  output logic [31:0] pairs_found,
  output logic [31:0] warps_sent
);
  typedef enum logic [1:0] {COLLECT, PAIR, FILL, EMIT} state_t;
  state_t state;

  // Quad buffer: per quad its position, coverage and attribute pointer; the
  // tile coordinate is common to the batch.
  typedef struct packed {
    logic [5:0] pos;   // {qy, qx}
    logic [3:0] cov;
    cbe_ptr_t   ptr;
  } qent_t;
  qent_t                buf_q [MAX_QUADS];
  logic [7:0]           tile_x, tile_y;
  logic [QW:0]          n;          // quads in the batch
  logic [QW:0]          scan;       // QID under examination / order index
  logic [63:0]          reg_v;      // quad registers: valid bits
  logic [QW-1:0]        reg_qid [64];
  logic [MAX_QUADS-1:0] bitmap;     // merge bitmap
  // Launch order built by the two passes: QID and merge flag per warp slot.
  logic [QW-1:0]        ord_qid [MAX_QUADS];
  logic [MAX_QUADS-1:0] ord_merge;
  logic [QW:0]          m;          // entries in the launch order

  qent_t         cur;
  logic [QW-1:0] scan_id;
  assign scan_id = scan[QW-1:0];
  assign cur     = buf_q[scan_id];

  qent_t oq;
  assign oq            = buf_q[ord_qid[scan_id]];
  assign out_valid     = (state == EMIT);
  assign out.q.tx      = tile_x;
  assign out.q.ty      = tile_y;
  assign out.q.qx      = oq.pos[2:0];
  assign out.q.qy      = oq.pos[5:3];
  assign out.q.cov     = oq.cov;
  assign out.q.ptr     = oq.ptr;
  assign out.merge     = ord_merge[scan_id];
  assign out.warp_last = (scan[2:0] == 3'(QUADS_PER_WARP - 1)) || (scan + 1'b1 == m);

  assign in_ready = (state == COLLECT);
  assign idle     = (state == COLLECT) && (n == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= COLLECT; n <= '0; m <= '0; scan <= '0;
      reg_v <= '0; bitmap <= '0; ord_merge <= '0; tile_x <= '0; tile_y <= '0;
      pairs_found <= '0; warps_sent <= '0;
    end else begin
      case (state)
        COLLECT: if (in_valid) begin
          if (!in.bubble) begin
            buf_q[n[QW-1:0]] <= '{pos: {in.q.qy, in.q.qx}, cov: in.q.cov, ptr: in.q.ptr};
            tile_x <= in.q.tx;
            tile_y <= in.q.ty;
            n <= n + 1'b1;
          end
          if (in.last) begin
            scan <= '0;
            m    <= '0;
            if (in.bubble && n == 0) state <= COLLECT;   // nothing survived
            else state <= qm_enable ? PAIR : FILL;
          end
        end
        PAIR: begin
          if (scan == n) begin
            scan  <= '0;
            state <= FILL;
          end else begin
            if (reg_v[cur.pos]) begin
              // overlap: earlier quad at the even slot, this one after it
              ord_qid[m[QW-1:0]]          <= reg_qid[cur.pos];
              ord_qid[m[QW-1:0] + 1'b1]   <= scan_id;
              ord_merge[m[QW-1:0]]        <= 1'b1;
              ord_merge[m[QW-1:0] + 1'b1] <= 1'b1;
              m <= m + (QW+1)'(2);
              reg_v[cur.pos]           <= 1'b0;
              bitmap[reg_qid[cur.pos]] <= 1'b1;
              bitmap[scan_id]          <= 1'b1;
              pairs_found <= pairs_found + 1'b1;
            end else begin
              reg_v[cur.pos]   <= 1'b1;
              reg_qid[cur.pos] <= scan_id;
            end
            scan <= scan + 1'b1;
          end
        end
        FILL: begin
          if (scan == n) begin
            scan  <= '0;
            state <= EMIT;
          end else begin
            if (!bitmap[scan_id]) begin
              ord_qid[m[QW-1:0]]   <= scan_id;
              ord_merge[m[QW-1:0]] <= 1'b0;
              m <= m + 1'b1;
            end
            scan <= scan + 1'b1;
          end
        end
        EMIT: if (out_ready) begin
          if (out.warp_last) warps_sent <= warps_sent + 1'b1;
          if (scan + 1'b1 == m) begin
            state <= COLLECT; n <= '0; scan <= '0; reg_v <= '0; bitmap <= '0;
          end else scan <= scan + 1'b1;
        end
        default: state <= COLLECT;
      endcase
    end
  end

  // pairs always start on an even slot of a warp
  a_pair_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out.merge && !scan[0] |-> ord_merge[scan_id + 1'b1]);
endmodule
