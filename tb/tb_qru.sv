// tb_qru: random batches of quads (few positions, so overlaps are common)
// through the quad reorder unit. A reference follows the paper's procedure
// (position registers, pairs first, then the unmerged quads by the bitmap)
// and predicts every warp slot, its merge flag and the warp boundaries.
// Also covers quad merging disabled, batches ending in a bubble, an
// all-bubble batch and the per-pixel order of the launched quads.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_qru;
  import vr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic qm_enable, in_valid, in_ready, out_valid, out_ready, idle;
  tc_quad_t in;
  warp_slot_t out;
  logic [31:0] pairs_found, warps_sent;

  qru #(.MAX_QUADS(128)) dut (.*);

  int checks = 0, failures = 0, exp_pairs = 0, exp_warps = 0;
  warp_slot_t exp [$];

  // random back-pressure from the shader cores; a slot is taken at the next
  // rising edge when out_valid and out_ready are both high after this edge
  always @(negedge clk) if (rst_n) begin
    out_ready = ($urandom_range(3) != 0);
    #1;
    if (out_valid && out_ready) check_slot();
  end

  task automatic check_slot();
    warp_slot_t e;
    checks++;
    if (exp.size() == 0) begin failures++; $display("FAIL unexpected slot"); end
    else begin
      e = exp.pop_front();
      if (out !== e) begin failures++; $display("FAIL slot got %h exp %h", out, e); end
    end
  endtask

  task automatic batch(input int n, input int npos, input bit qm, input bit end_bubble);
    quad_t q [$];
    int reg_q [64];
    bit merged [$];
    int order [$];
    bit mflag [$];
    logic [7:0] tx, ty;
    tx = 8'($urandom); ty = 8'($urandom);
    for (int i = 0; i < 64; i++) reg_q[i] = -1;
    for (int i = 0; i < n; i++) begin
      quad_t x;
      x.tx = tx; x.ty = ty;
      {x.qy, x.qx} = 6'($urandom_range(npos - 1) * 5);
      x.cov = 4'($urandom_range(15, 1)); x.ptr = $urandom;
      q.push_back(x); merged.push_back(0);
    end
    if (qm) for (int i = 0; i < n; i++) begin
      int p = {q[i].qy, q[i].qx};
      if (reg_q[p] >= 0) begin
        order.push_back(reg_q[p]); mflag.push_back(1);
        order.push_back(i);        mflag.push_back(1);
        merged[reg_q[p]] = 1; merged[i] = 1; reg_q[p] = -1; exp_pairs++;
      end else reg_q[p] = i;
    end
    for (int i = 0; i < n; i++) if (!merged[i]) begin order.push_back(i); mflag.push_back(0); end
    foreach (order[k]) begin
      warp_slot_t s;
      s.q = q[order[k]]; s.merge = mflag[k];
      s.warp_last = (k % 8 == 7) || (k == order.size() - 1);
      if (s.warp_last) exp_warps++;
      exp.push_back(s);
    end
    // per-pixel order check of the predicted launch order (front to back)
    for (int a = 0; a < order.size(); a++)
      for (int b = a + 1; b < order.size(); b++)
        if ({q[order[a]].qy, q[order[a]].qx} == {q[order[b]].qy, q[order[b]].qx} && order[a] > order[b]) begin
          failures++; $display("FAIL launch order breaks pixel order");
        end
    // drive
    qm_enable = qm;
    for (int i = 0; i < n + end_bubble; i++) begin
      in.q = (i < n) ? q[i] : '0;
      in.bubble = (i == n);
      in.last = (i == n + end_bubble - 1);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    in_valid = 0; in = '0; qm_enable = 1; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    batch(6, 2, 1, 0);
    batch(4, 1, 1, 0);           // all quads paired
    batch(0, 1, 1, 1);           // every quad terminated: bubble only
    batch(128, 64, 1, 0);        // a full bin
    batch(128, 3, 1, 1);
    batch(40, 4, 0, 0);          // merging disabled
    for (int r = 0; r < 30; r++) batch($urandom_range(1, 128), $urandom_range(1, 16), 1, r % 2);
    @(negedge clk);
    wait (idle);
    repeat (3) @(negedge clk);
    checks += 3;
    if (exp.size() != 0) begin failures++; $display("FAIL %0d slots missing", exp.size()); end
    if (int'(pairs_found) != exp_pairs) begin failures++; $display("FAIL pairs %0d exp %0d", pairs_found, exp_pairs); end
    if (int'(warps_sent) != exp_warps) begin failures++; $display("FAIL warps %0d exp %0d", warps_sent, exp_warps); end
    $display("pairs=%0d warps=%0d", pairs_found, warps_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
