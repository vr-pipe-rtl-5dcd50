// tb_crop: random shaded quads on both lanes of the colour ROP, concentrated
// on a few quad addresses so that the lanes often hit the same quad in one
// cycle. A per-pixel reference blends the fragments in stream order and
// predicts every termination request. Also checks the 2-quads-per-cycle rate,
// stalls while ZROP is not ready, and the clear sweep.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_crop;
  import vr_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 16, H = 16, QX = W / 2, N = (W / 2) * (H / 2);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] alpha_th;
  logic clear_req, clear_busy, in_ready, term_ready;
  logic [1:0] in_valid, term_valid;
  shaded_quad_t [1:0] in_quad;
  term_req_t [1:0] term_req;
  logic [31:0] quads_blended, frags_blended, pixels_terminated;
  logic [5:0] dbg_addr;
  rgba_t [3:0] dbg_data;

  crop #(.SCREEN_W(W), .SCREEN_H(H), .LANES(2)) dut (.*);

  rgba_t ref_px [N][4];
  term_req_t exp_t [$];
  int checks = 0, failures = 0, nterm = 0;

  always @(negedge clk) if (rst_n) for (int l = 0; l < 2; l++) if (term_valid[l] && term_ready) begin
    term_req_t e;
    checks++;
    if (exp_t.size() == 0) begin failures++; $display("FAIL unexpected term"); end
    else begin
      e = exp_t.pop_front();
      if (term_req[l] !== e) begin failures++; $display("FAIL term %p exp %p", term_req[l], e); end
    end
  end

  function automatic shaded_quad_t rnd_quad();
    shaded_quad_t q;
    q.qx = 11'($urandom_range(1));
    q.qy = 11'($urandom_range(1));
    q.cov = 4'($urandom_range(15, 1));
    for (int f = 0; f < 4; f++) begin
      q.c[f].a = 16'($urandom_range(30000, 2000));
      q.c[f].r = 16'(ref_mul($urandom_range(65535), q.c[f].a));
      q.c[f].g = 16'(ref_mul($urandom_range(65535), q.c[f].a));
      q.c[f].b = 16'(ref_mul($urandom_range(65535), q.c[f].a));
    end
    return q;
  endfunction

  task automatic reference(input shaded_quad_t q);
    int a;
    term_req_t t;
    a = int'(q.qy) * QX + int'(q.qx);
    t.qx = q.qx; t.qy = q.qy; t.mask = '0;
    for (int f = 0; f < 4; f++) if (q.cov[f]) begin
      rgba_t o;
      o = ref_blend(ref_px[a][f], q.c[f]);
      if (ref_px[a][f].a < alpha_th && o.a >= alpha_th) t.mask[f] = 1'b1;
      ref_px[a][f] = o;
    end
    if (t.mask != 0) begin exp_t.push_back(t); nterm++; end
  endtask

  initial begin
    int t0, t1;
    alpha_th = ALPHA_TH_DEFAULT; clear_req = 0; in_valid = '0; in_quad = '0;
    term_ready = 1; dbg_addr = '0;
    for (int i = 0; i < N; i++) for (int f = 0; f < 4; f++) ref_px[i][f] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (!clear_busy);
    @(negedge clk);
    // full-rate phase: 200 cycles of two quads each
    t0 = $time;
    for (int k = 0; k < 200; k++) begin
      in_valid = 2'b11;
      in_quad[0] = rnd_quad(); in_quad[1] = rnd_quad();
      reference(in_quad[0]); reference(in_quad[1]);
      @(negedge clk);
    end
    t1 = $time;
    in_valid = '0;
    checks++;
    if (int'(quads_blended) != 400) begin failures++; $display("FAIL rate: %0d quads", quads_blended); end
    // stall phase: ZROP not always ready, single-lane quads too
    for (int k = 0; k < 200; k++) begin
      in_valid = 2'($urandom_range(3, 1));
      in_quad[0] = rnd_quad(); in_quad[1] = rnd_quad();
      term_ready = 1'($urandom);
      if (in_valid[0]) reference(in_quad[0]);
      if (in_valid[1]) reference(in_quad[1]);
      @(posedge clk);
      while (!in_ready) begin @(negedge clk); term_ready = 1'($urandom); @(posedge clk); end
      @(negedge clk);
    end
    in_valid = '0; term_ready = 1;
    repeat (3) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      dbg_addr = 6'(i); #1;
      for (int f = 0; f < 4; f++) begin
        checks++;
        if (dbg_data[f] !== ref_px[i][f]) begin
          failures++; $display("FAIL pixel %0d.%0d got %h exp %h", i, f, dbg_data[f], ref_px[i][f]);
        end
      end
    end
    checks += 2;
    if (exp_t.size() != 0) begin failures++; $display("FAIL %0d term requests missing", exp_t.size()); end
    if (nterm == 0) begin failures++; $display("FAIL no termination happened"); end
    clear_req = 1; @(negedge clk); clear_req = 0;
    wait (!clear_busy); @(negedge clk);
    for (int i = 0; i < N; i++) begin
      dbg_addr = 6'(i); #1;
      checks++;
      if (dbg_data !== '0) begin failures++; $display("FAIL not cleared %0d", i); end
    end
    $display("terminations=%0d", nterm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
