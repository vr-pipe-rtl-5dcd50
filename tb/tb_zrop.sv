// tb_zrop: termination updates followed by a stream of quads through the
// termination test, on a 16x16-pixel surface. Checks surviving coverage,
// dropped quads, end-of-batch bubbles, the stencil contents, HET disable and
// the clear sweep.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_zrop;
  import vr_pkg::*;
  localparam int W = 16, H = 16, QX = W / 2, N = (W / 2) * (H / 2);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic het_enable, clear_req, clear_busy;
  logic in_valid, in_last, in_ready, out_valid, out_ready;
  quad_t in_quad;
  tc_quad_t out;
  logic [1:0] term_valid;
  term_req_t [1:0] term_req;
  logic term_ready, update_busy;
  logic [31:0] quads_dropped, frags_discarded;
  logic [5:0] dbg_addr;
  logic [3:0][7:0] dbg_data;
  logic [3:0] term_ref [N];
  int checks = 0, failures = 0;

  zrop #(.SCREEN_W(W), .SCREEN_H(H)) dut (.*);

  tc_quad_t exp_q [$];
  // output checker
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    tc_quad_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out !== e) begin failures++; $display("FAIL out %0d exp %0d t=%0t", out, e, $time); end
    end
  end

  task automatic send_quads(input bit het);
    int expect_drop = 0, d0;
    d0 = int'(quads_dropped);
    @(negedge clk);
    het_enable = het;
    for (int i = 0; i < N; i++) begin
      quad_t q;
      tc_quad_t e;
      logic [3:0] c;
      q.tx = 8'(i % QX / 8); q.qx = 3'(i % QX % 8);
      q.ty = 8'(i / QX / 8); q.qy = 3'(i / QX % 8);
      q.cov = 4'($urandom_range(15, 1));
      q.ptr = $urandom;
      c = het ? (q.cov & ~term_ref[i]) : q.cov;
      e.q = q; e.q.cov = c; e.last = (i % 5 == 4); e.bubble = (c == 0);
      if (c != 0 || e.last) exp_q.push_back(e);
      if (c == 0) expect_drop++;
      in_quad = q; in_last = e.last; in_valid = 1;
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    if (int'(quads_dropped) - d0 != expect_drop) begin
      failures++; $display("FAIL dropped %0d exp %0d", int'(quads_dropped) - d0, expect_drop);
    end
  endtask

  initial begin
    het_enable = 1; clear_req = 0; in_valid = 0; in_last = 0; in_quad = '0;
    term_valid = '0; term_req = '0; dbg_addr = '0; out_ready = 1;
    for (int i = 0; i < N; i++) term_ref[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    wait (!clear_busy);
    @(posedge clk); #1;
    // termination updates
    for (int k = 0; k < 40; k++) begin
      for (int l = 0; l < 2; l++) begin
        term_valid[l] = 1'($urandom);
        term_req[l].qx = 11'($urandom_range(QX - 1));
        term_req[l].qy = 11'($urandom_range(H / 2 - 1));
        term_req[l].mask = 4'($urandom_range(15, 1));
      end
      do @(posedge clk); while (!term_ready);
      for (int l = 0; l < 2; l++) if (term_valid[l])
        term_ref[int'(term_req[l].qy) * QX + int'(term_req[l].qx)] |= term_req[l].mask;
      #1;
    end
    term_valid = '0;
    @(posedge clk);
    wait (!update_busy);
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) begin
      dbg_addr = 6'(i); #1;
      for (int f = 0; f < 4; f++) begin
        checks++;
        if (dbg_data[f][7] !== term_ref[i][f] || dbg_data[f][6:0] !== 7'd0) begin
          failures++; $display("FAIL stencil %0d.%0d = %h", i, f, dbg_data[f]);
        end
      end
    end
    send_quads(1);
    send_quads(0);            // baseline: nothing discarded
    // clear and check
    clear_req = 1; @(posedge clk); #1; clear_req = 0;
    wait (!clear_busy); @(posedge clk); #1;
    for (int i = 0; i < N; i++) begin
      dbg_addr = 6'(i); #1;
      checks++;
      if (dbg_data !== '0) begin failures++; $display("FAIL not cleared %0d", i); end
    end
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
