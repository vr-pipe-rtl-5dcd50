// sm_model: behavioural model of the shader cores' fragment shading for the
// cluster testbenches (not hardware of this design).
//
// It takes warp slots from the quad reorder unit, buffers a whole warp, and
// for each quad computes the fragment colours with tb_ref_pkg::frag_color,
// discards fragments with alpha < 1/255 (alpha pruning), and performs quad
// merging: a merge pair (slots 2n, 2n+1) is blended per fragment, front (2n)
// over back (2n+1), into one quad whose coverage is the union, as the paper's
// shader extension does with a warp shuffle. Quads with no fragment left are
// not returned. Shaded quads are returned in order, up to two per cycle, after
// a fixed latency per warp.
//
// Interface: warp_valid/warp_slot/warp_ready in (one slot per cycle), and
// sq_valid[1:0]/sq/sq_ready out (lane 0 first); counters and busy.
// Outputs change at the falling edge. The shading function and the merge
// rule follow the paper's description; the colour function is made up.
module sm_model
  import vr_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int LATENCY = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 warp_valid,
  input  warp_slot_t           warp_slot,
  output logic                 warp_ready,
  output logic [1:0]           sq_valid,
  output shaded_quad_t [1:0]   sq,
  input  logic                 sq_ready,
  output int                   frags_pruned,
  output int                   quads_merged,
  output logic                 busy
);
  warp_slot_t   warp [$];
  shaded_quad_t outq [$];
  longint       outt [$];      // cycle from which each shaded quad may leave
  longint       cyc;


  function automatic shaded_quad_t shade(input quad_t q);
    shaded_quad_t s;
    s.qx = {q.tx, q.qx};
    s.qy = {q.ty, q.qy};
    s.cov = '0;
    for (int f = 0; f < 4; f++) begin
      s.c[f] = frag_color(q.ptr, int'(s.qx) * 2 + f % 2, int'(s.qy) * 2 + f / 2);
      if (q.cov[f]) begin
        if (s.c[f].a < PRUNE_TH) frags_pruned++;
        else s.cov[f] = 1'b1;
      end
    end
    return s;
  endfunction

  task automatic run_warp();
    for (int i = 0; i < warp.size(); i++) begin
      shaded_quad_t a, b;
      a = shade(warp[i].q);
      if (warp[i].merge) begin
        b = shade(warp[i + 1].q);
        for (int f = 0; f < 4; f++) begin
          if (a.cov[f] && b.cov[f]) a.c[f] = ref_blend(a.c[f], b.c[f]);
          else if (b.cov[f]) a.c[f] = b.c[f];
        end
        a.cov = a.cov | b.cov;
        quads_merged++;
        i++;
      end
      if (a.cov != 0) begin outq.push_back(a); outt.push_back(cyc + LATENCY); end
    end
    warp.delete();
  endtask

  initial begin frags_pruned = 0; quads_merged = 0; cyc = 0; sq_valid = '0; sq = '0; warp_ready = 1'b0; busy = 1'b0; end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (warp_valid && warp_ready) begin
      warp.push_back(warp_slot);
      if (warp_slot.warp_last) run_warp();
    end
    if (sq_valid[0] && sq_ready) begin
      void'(outq.pop_front()); void'(outt.pop_front());
      if (sq_valid[1]) begin void'(outq.pop_front()); void'(outt.pop_front()); end
    end
  end

  // present up to two ready quads, changed away from the rising edge
  always @(negedge clk) begin
    warp_ready = (outq.size() < 64);
    busy       = (warp.size() != 0) || (outq.size() != 0);
    sq_valid = '0;
    sq = '0;
    if (outq.size() > 0 && outt[0] <= cyc) begin sq_valid[0] = 1'b1; sq[0] = outq[0]; end
    if (outq.size() > 1 && outt[1] <= cyc) begin sq_valid[1] = 1'b1; sq[1] = outq[1]; end
  end
endmodule
