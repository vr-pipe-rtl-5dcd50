// tgc_unit: tile grid coalescing unit (VR-Pipe extension).
//
// Primitives from the VPO are binned by tile grid, a block of GRID_TILES x
// GRID_TILES screen tiles (4x4 tiles = 64x64 pixels in the paper), so that
// when a bin is flushed the rasterizer produces quads for a region small
// enough for the tile coalescing bins to hold, and overlapping quads meet in
// the same TC bin more often.
//
// Tile grid ID calculation: the VPO gives each primitive's bounding box in
// screen tiles; this unit walks the grids the box touches, one grid per cycle,
// and forms the 2-byte ID {gy, gx} = {ty >> 2, tx >> 2}. Each ID is compared
// with the tags of all NUM_BINS bins at once (128 bins in the paper). A hit
// appends the primitive's three attribute pointers to that bin; a miss takes a
// free bin. A bin is flushed when it holds BIN_SIZE primitives (16). When a
// miss finds no free bin, the oldest bin is flushed first (as the TC unit
// does; the paper says bins are flushed early when primitives spread over many
// grids but does not give the rule), and flush_all (end of a draw call)
// flushes every bin. Both are this design's choices.
//
// A flush streams the bin's primitives in arrival order, one per cycle, with
// the tile grid ID and 'last' on the final one; input waits meanwhile.
//
// Interface: in_valid/in_prim/in_ready from the VPO, out_valid/out_prim/
// out_ready to the rasterizer, flush_all, empty, and flush counters.
// Timing: one grid insert per cycle; one primitive per cycle out.
module tgc_unit
  import vr_pkg::*;
#(
  parameter int unsigned NUM_BINS   = 128,
  parameter int unsigned BIN_SIZE   = 16,
  parameter int unsigned GRID_SHIFT = 2,    // log2 of tiles per grid edge (4)
  localparam int unsigned BW = $clog2(NUM_BINS),
  localparam int unsigned CW = $clog2(BIN_SIZE + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush_all,
  input  logic        in_valid,
  input  prim_t       in_prim,
  output logic        in_ready,
  output logic        out_valid,
  output tgc_prim_t   out_prim,
  input  logic        out_ready,
  output logic        empty,        // no bin holds a primitive and none is being walked
  output logic [31:0] flush_full,
  output logic [31:0] flush_evict,
  output logic [31:0] flush_drain,
  output logic [31:0] grid_inserts
);
  typedef cbe_ptr_t [2:0] ptrs_t;
  ptrs_t               store [NUM_BINS][BIN_SIZE];
  logic [NUM_BINS-1:0] bvalid;
  grid_id_t            btag [NUM_BINS];
  logic [CW-1:0]       bcnt [NUM_BINS];
  logic [31:0]         bage [NUM_BINS];
  logic [31:0]         age_ctr;

  // ------------- tile grid ID calculation -------------
  logic     walking;
  prim_t    cur;
  grid_id_t gid;          // grid being inserted
  logic [7:0] gx_end, gy_end, gx_start;
  assign gx_start = cur.tx0 >> GRID_SHIFT;
  assign gx_end   = cur.tx1 >> GRID_SHIFT;
  assign gy_end   = cur.ty1 >> GRID_SHIFT;

  logic          flushing;
  logic [BW-1:0] fbin;
  logic [CW-1:0] fidx;

  // ------------- tag comparison -------------
  logic          hit, have_free;
  logic [BW-1:0] hit_bin, free_bin, old_bin;
  always_comb begin
    hit = 1'b0; hit_bin = '0; have_free = 1'b0; free_bin = '0; old_bin = '0;
    for (int b = NUM_BINS - 1; b >= 0; b--) begin
      if (bvalid[b] && btag[b] == gid) begin hit = 1'b1; hit_bin = BW'(b); end
      if (!bvalid[b]) begin have_free = 1'b1; free_bin = BW'(b); end
    end
    for (int b = 0; b < NUM_BINS; b++)
      if (bvalid[b] && (!bvalid[old_bin] || bage[b] < bage[old_bin])) old_bin = BW'(b);
  end

  assign in_ready  = !walking;
  assign empty     = (bvalid == '0) && !walking;
  assign out_valid = flushing;
  assign out_prim.ptr  = store[fbin][fidx[$clog2(BIN_SIZE)-1:0]];
  assign out_prim.gid  = btag[fbin];
  assign out_prim.last = flushing && (fidx == bcnt[fbin] - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid   <= '0;
      walking  <= 1'b0;
      cur      <= '0;
      gid      <= '0;
      flushing <= 1'b0;
      fbin     <= '0;
      fidx     <= '0;
      age_ctr  <= '0;
      flush_full <= '0; flush_evict <= '0; flush_drain <= '0; grid_inserts <= '0;
      for (int b = 0; b < NUM_BINS; b++) begin
        bcnt[b] <= '0; bage[b] <= '0; btag[b] <= '0;
      end
    end else begin
      if (in_valid && in_ready) begin
        walking <= 1'b1;
        cur     <= in_prim;
        gid.gx  <= in_prim.tx0 >> GRID_SHIFT;
        gid.gy  <= in_prim.ty0 >> GRID_SHIFT;
      end

      if (flushing) begin
        if (out_ready) begin
          if (out_prim.last) begin
            flushing     <= 1'b0;
            bvalid[fbin] <= 1'b0;
            bcnt[fbin]   <= '0;
          end
          fidx <= fidx + 1'b1;
        end
      end else if (walking && (hit || have_free)) begin
        logic [BW-1:0] b;
        b = hit ? hit_bin : free_bin;
        store[b][bcnt[b][$clog2(BIN_SIZE)-1:0]] <= cur.ptr;
        bcnt[b] <= bcnt[b] + 1'b1;
        grid_inserts <= grid_inserts + 1'b1;
        if (!hit) begin
          bvalid[b] <= 1'b1;
          btag[b]   <= gid;
          bage[b]   <= age_ctr;
          age_ctr   <= age_ctr + 1'b1;
        end
        if (32'(bcnt[b]) + 1 == BIN_SIZE) begin
          flushing <= 1'b1; fbin <= b; fidx <= '0;
          flush_full <= flush_full + 1'b1;
        end
        // next grid of the bounding box, row by row
        if (gid.gx != gx_end) gid.gx <= gid.gx + 1'b1;
        else if (gid.gy != gy_end) begin
          gid.gx <= gx_start;
          gid.gy <= gid.gy + 1'b1;
        end else walking <= 1'b0;
      end else if (walking) begin
        flushing <= 1'b1; fbin <= old_bin; fidx <= '0;
        flush_evict <= flush_evict + 1'b1;
      end else if (flush_all && bvalid != '0) begin
        flushing <= 1'b1; fbin <= old_bin; fidx <= '0;
        flush_drain <= flush_drain + 1'b1;
      end
    end
  end
endmodule
