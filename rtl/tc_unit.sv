// tc_unit: tile coalescing unit. Collects quads of the same screen tile into
// bins and flushes whole bins towards the PROP/ZROP.
//
// NUM_BINS bins (32 in the paper) of up to BIN_SIZE quads (128) each are
// tagged with a screen tile coordinate. An incoming quad is appended to the
// bin of its tile or, if there is none, to a newly allocated bin. A bin is
// flushed when:
//   1. it is full;
//   2. all bins are in use and a quad of a new tile arrives: the oldest bin
//      (earliest allocated) is flushed first and the quad then waits for it;
//   3. TIMEOUT cycles have passed since the bin's last incoming quad;
// and, in addition (this design's choice), every bin is flushed while
// flush_all is high, which the cluster raises at the end of a draw call.
//
// A flush streams the bin's quads out in arrival order, one per cycle on a
// valid/ready port, with 'last' on the final quad. No quad is accepted while a
// flush is in progress. The per-bin timeout counter, the age stamp used to find
// the oldest bin and the stall during a flush are this design's choices; the
// paper gives the bin counts, sizes and the three flush conditions.
module tc_unit
  import vr_pkg::*;
#(
  parameter int unsigned NUM_BINS = 32,
  parameter int unsigned BIN_SIZE = 128,
  parameter int unsigned TIMEOUT  = 256,
  localparam int unsigned BW = $clog2(NUM_BINS),
  localparam int unsigned CW = $clog2(BIN_SIZE + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush_all,
  input  logic        in_valid,
  input  quad_t       in_quad,
  output logic        in_ready,
  output logic        out_valid,
  output quad_t       out_quad,
  output logic        out_last,
  input  logic        out_ready,
  output logic        empty,          // no bin holds a quad
  output logic [31:0] flush_full,     // flush counts per cause
  output logic [31:0] flush_evict,
  output logic [31:0] flush_timeout,
  output logic [31:0] flush_drain
);
  quad_t             store [NUM_BINS][BIN_SIZE];
  logic [NUM_BINS-1:0] bvalid;
  logic [7:0]        btx [NUM_BINS];
  logic [7:0]        bty [NUM_BINS];
  logic [CW-1:0]     bcnt [NUM_BINS];
  logic [31:0]       bage [NUM_BINS];
  logic [15:0]       bidle [NUM_BINS];
  logic [31:0]       age_ctr;

  // flush state
  logic              flushing;
  logic [BW-1:0]     fbin;
  logic [CW-1:0]     fidx;

  // ------------- bin lookup -------------
  logic          hit, have_free, any_timeout;
  logic [BW-1:0] hit_bin, free_bin, old_bin, to_bin;
  always_comb begin
    hit = 1'b0; hit_bin = '0;
    have_free = 1'b0; free_bin = '0;
    any_timeout = 1'b0; to_bin = '0;
    old_bin = '0;
    for (int b = NUM_BINS - 1; b >= 0; b--) begin
      if (bvalid[b] && btx[b] == in_quad.tx && bty[b] == in_quad.ty) begin
        hit = 1'b1; hit_bin = BW'(b);
      end
      if (!bvalid[b]) begin
        have_free = 1'b1; free_bin = BW'(b);
      end
      if (bvalid[b] && 32'(bidle[b]) >= TIMEOUT) begin
        any_timeout = 1'b1; to_bin = BW'(b);
      end
    end
    for (int b = 0; b < NUM_BINS; b++)
      if (bvalid[b] && (!bvalid[old_bin] || bage[b] < bage[old_bin])) old_bin = BW'(b);
  end

  assign empty    = (bvalid == '0);
  // A quad is taken when it has a bin to go to; a miss with no free bin
  // starts an eviction instead.
  assign in_ready = !flushing && !any_timeout && (hit || have_free);

  assign out_valid = flushing;
  assign out_quad  = store[fbin][fidx[$clog2(BIN_SIZE)-1:0]];
  assign out_last  = flushing && (fidx == bcnt[fbin] - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid   <= '0;
      flushing <= 1'b0;
      fbin     <= '0;
      fidx     <= '0;
      age_ctr  <= '0;
      flush_full <= '0; flush_evict <= '0; flush_timeout <= '0; flush_drain <= '0;
      for (int b = 0; b < NUM_BINS; b++) begin
        bcnt[b]  <= '0;
        bidle[b] <= '0;
        bage[b]  <= '0;
        btx[b]   <= '0;
        bty[b]   <= '0;
      end
    end else begin
      for (int b = 0; b < NUM_BINS; b++)
        if (bvalid[b] && bidle[b] != 16'hFFFF) bidle[b] <= bidle[b] + 1'b1;

      if (flushing) begin
        if (out_ready) begin
          if (out_last) begin
            flushing     <= 1'b0;
            bvalid[fbin] <= 1'b0;
            bcnt[fbin]   <= '0;
          end
          fidx <= fidx + 1'b1;
        end
      end else if (any_timeout) begin
        flushing <= 1'b1; fbin <= to_bin; fidx <= '0;
        flush_timeout <= flush_timeout + 1'b1;
      end else if (in_valid && in_ready) begin
        logic [BW-1:0] b;
        b = hit ? hit_bin : free_bin;
        store[b][bcnt[b][$clog2(BIN_SIZE)-1:0]] <= in_quad;
        bcnt[b]  <= bcnt[b] + 1'b1;
        bidle[b] <= '0;
        if (!hit) begin
          bvalid[b] <= 1'b1;
          btx[b]    <= in_quad.tx;
          bty[b]    <= in_quad.ty;
          bage[b]   <= age_ctr;
          age_ctr   <= age_ctr + 1'b1;
        end
        if (32'(bcnt[b]) + 1 == BIN_SIZE) begin
          flushing <= 1'b1; fbin <= b; fidx <= '0;
          flush_full <= flush_full + 1'b1;
        end
      end else if (in_valid && !hit && !have_free) begin
        flushing <= 1'b1; fbin <= old_bin; fidx <= '0;
        flush_evict <= flush_evict + 1'b1;
      end else if (flush_all && !empty) begin
        flushing <= 1'b1; fbin <= old_bin; fidx <= '0;
        flush_drain <= flush_drain + 1'b1;
      end
    end
  end

  // A full bin is flushed in the cycle after its last quad is written, so the
  // write of that quad and the start of the flush never overlap.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_ready |-> 32'(bcnt[hit ? hit_bin : free_bin]) < BIN_SIZE);
endmodule
