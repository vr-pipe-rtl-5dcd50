// tb_tc_unit: small tile coalescing unit (4 bins x 8 quads, timeout 30).
// Drives quads of chosen tiles to provoke each flush cause: a full bin, the
// eviction of the oldest bin by a fifth tile, a timeout, and the end-of-draw
// drain. A reference model of the bins predicts every flushed batch, in order.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_tc_unit;
  import vr_pkg::*;
  localparam int NB = 4, BS = 8, TO = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush_all, in_valid, in_ready, out_valid, out_last, out_ready, empty;
  quad_t in_quad, out_quad;
  logic [31:0] flush_full, flush_evict, flush_timeout, flush_drain;

  tc_unit #(.NUM_BINS(NB), .BIN_SIZE(BS), .TIMEOUT(TO)) dut (.*);

  int checks = 0, failures = 0;
  quad_t got [$];
  quad_t exp [$];
  // reference bins
  quad_t rb [NB][$];
  int    rtile [NB];
  bit    rv [NB];
  int    rage [NB];
  int    agec = 0;

  always @(negedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_quad);

  task automatic ref_flush(input int b);
    foreach (rb[b][i]) exp.push_back(rb[b][i]);
    rb[b].delete();
    rv[b] = 0;
  endtask

  function automatic int oldest();
    int o = -1;
    for (int b = 0; b < NB; b++) if (rv[b] && (o < 0 || rage[b] < rage[o])) o = b;
    return o;
  endfunction

  task automatic send(input int tile, input int n);
    for (int k = 0; k < n; k++) begin
      quad_t q;
      int b = -1;
      q.tx = 8'(tile); q.ty = 8'(tile + 1);
      q.qx = 3'($urandom); q.qy = 3'($urandom); q.cov = 4'($urandom_range(15, 1)); q.ptr = $urandom;
      // reference
      for (int i = 0; i < NB; i++) if (rv[i] && rtile[i] == tile) b = i;
      if (b < 0) begin
        for (int i = NB - 1; i >= 0; i--) if (!rv[i]) b = i;
        if (b < 0) begin b = oldest(); ref_flush(b); end
        rv[b] = 1; rtile[b] = tile; rage[b] = agec++;
      end
      rb[b].push_back(q);
      if (rb[b].size() == BS) ref_flush(b);
      // drive
      in_quad = q; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  task automatic drain();
    int o;
    while ((o = oldest()) >= 0) ref_flush(o);
    @(negedge clk);
    flush_all = 1;
    repeat (3) @(negedge clk);
    wait (empty && !out_valid);
    @(negedge clk);
    flush_all = 0;
  endtask

  initial begin
    flush_all = 0; in_valid = 0; in_quad = '0; out_ready = 1;
    for (int b = 0; b < NB; b++) rv[b] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    send(1, 3); send(2, 2); send(1, 5);          // tile 1 fills up: full flush
    send(3, 1); send(4, 1); send(5, 2);          // five tiles in four bins: eviction
    send(2, 1);
    drain();
    send(7, 2);                                  // left alone: timeout
    repeat (TO + 20) @(negedge clk);
    for (int b = 0; b < NB; b++) if (rv[b]) ref_flush(b);
    for (int r = 0; r < 20; r++) send($urandom_range(9, 20), $urandom_range(1, 6));
    drain();
    repeat (5) @(negedge clk);
    checks++;
    if (got.size() != exp.size()) begin failures++; $display("FAIL %0d quads out, %0d expected", got.size(), exp.size()); end
    // the quads of each tile leave in arrival order (batches of different
    // tiles may interleave differently once timeouts fire)
    for (int t = 0; t < 24; t++) begin
      quad_t g [$], e [$];
      foreach (got[i]) if (got[i].tx == 8'(t)) g.push_back(got[i]);
      foreach (exp[i]) if (exp[i].tx == 8'(t)) e.push_back(exp[i]);
      checks++;
      if (g != e) begin failures++; $display("FAIL tile %0d order/contents differ", t); end
    end
    checks += 4;
    if (flush_full == 0)    begin failures++; $display("FAIL no full flush"); end
    if (flush_evict == 0)   begin failures++; $display("FAIL no eviction flush"); end
    if (flush_timeout == 0) begin failures++; $display("FAIL timeout flushes %0d", flush_timeout); end
    if (flush_drain == 0)   begin failures++; $display("FAIL no drain flush"); end
    $display("flushes full=%0d evict=%0d timeout=%0d drain=%0d", flush_full, flush_evict, flush_timeout, flush_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 'last' must close each batch of one tile
  quad_t prev; bit inb = 0;
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    if (inb && (out_quad.tx != prev.tx || out_quad.ty != prev.ty)) begin
      failures++; $display("FAIL batch mixes tiles");
    end
    prev = out_quad; inb = !out_last;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
