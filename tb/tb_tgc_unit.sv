// tb_tgc_unit: small tile grid coalescing unit (4 bins x 4 primitives).
// Random primitives whose tile boxes cover one or several 4x4-tile grids.
// Checks that each primitive reaches the bin of every grid it touches, once,
// in submission order per grid; that a batch never mixes grids; and that full,
// eviction and drain flushes all occur. A directed sequence checks that the
// oldest bin is the one evicted.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_tgc_unit;
  import vr_pkg::*;
  localparam int NB = 4, BS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush_all, in_valid, in_ready, out_valid, out_ready, empty;
  prim_t in_prim;
  tgc_prim_t out_prim;
  logic [31:0] flush_full, flush_evict, flush_drain, grid_inserts;

  tgc_unit #(.NUM_BINS(NB), .BIN_SIZE(BS)) dut (.*);

  int checks = 0, failures = 0, n_ins = 0;
  typedef cbe_ptr_t [2:0] ptrs_t;
  ptrs_t exp_g [int][$];       // per grid id, expected pointer triples
  ptrs_t got_g [int][$];
  int cur_gid = -1;
  int first_gid = -1;
  bit watch = 0;

  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int g;
    g = int'(out_prim.gid);
    if (cur_gid >= 0 && g != cur_gid) begin failures++; $display("FAIL batch mixes grids"); end
    got_g[g].push_back(out_prim.ptr);
    if (watch && first_gid < 0) first_gid = g;
    cur_gid = out_prim.last ? -1 : g;
  end

  initial begin
    flush_all = 0; in_valid = 0; in_prim = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 150; k++) begin
      prim_t p;
      int w, h;
      w = (k % 7 == 0) ? $urandom_range(8) : $urandom_range(2);
      h = (k % 5 == 0) ? $urandom_range(6) : $urandom_range(1);
      p.tx0 = 8'($urandom_range(14)); p.ty0 = 8'($urandom_range(10));
      p.tx1 = p.tx0 + 8'(w); p.ty1 = p.ty0 + 8'(h);
      for (int i = 0; i < 3; i++) p.ptr[i] = $urandom;
      for (int gy = p.ty0 / 4; gy <= p.ty1 / 4; gy++)
        for (int gx = p.tx0 / 4; gx <= p.tx1 / 4; gx++) begin
          exp_g[gy * 256 + gx].push_back(p.ptr);
          n_ins++;
        end
      in_prim = p; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      if (k % 3 == 0) repeat ($urandom_range(3)) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    wait (in_ready);
    flush_all = 1;
    repeat (5) @(negedge clk);
    wait (empty && !out_valid);
    @(negedge clk);
    flush_all = 0;
    foreach (exp_g[g]) begin
      checks++;
      if (!got_g.exists(g) || got_g[g] != exp_g[g]) begin
        failures++; $display("FAIL grid %0h: got %0d prims, exp %0d", g, got_g.exists(g) ? got_g[g].size() : 0, exp_g[g].size());
      end
    end
    // directed: fill all bins with grids 0..3 (oldest first), then a fifth
    // grid must evict the oldest bin, grid 0
    watch = 1;
    for (int k = 0; k < NB + 1; k++) begin
      prim_t p;
      p.tx0 = 8'((k % NB) * 4); p.ty0 = 8'((k / NB) * 4); p.tx1 = p.tx0; p.ty1 = p.ty0;
      for (int i = 0; i < 3; i++) p.ptr[i] = $urandom;
      n_ins++;
      in_prim = p; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    flush_all = 1;
    repeat (5) @(negedge clk);
    wait (empty && !out_valid);
    @(negedge clk);
    flush_all = 0;
    checks++;
    if (first_gid != 0) begin failures++; $display("FAIL evicted grid %0d, expected the oldest (0)", first_gid); end
    checks += 5;
    if (got_g.num() != exp_g.num()) begin failures++; $display("FAIL extra grids"); end
    if (int'(grid_inserts) != n_ins) begin failures++; $display("FAIL inserts %0d exp %0d", grid_inserts, n_ins); end
    if (flush_full == 0)  begin failures++; $display("FAIL no full flush"); end
    if (flush_evict == 0) begin failures++; $display("FAIL no eviction flush"); end
    if (flush_drain == 0) begin failures++; $display("FAIL no drain flush"); end
    $display("flushes full=%0d evict=%0d drain=%0d inserts=%0d", flush_full, flush_evict, flush_drain, grid_inserts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
