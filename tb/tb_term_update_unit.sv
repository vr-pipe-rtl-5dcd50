// tb_term_update_unit: random termination requests on two lanes against a
// memory model; checks the final stencil words, that the ordinary stencil
// bits are untouched, and the rate of one update per cycle.
//
// Interface: none; this is a top-level testbench. Timing: a 10-unit clock.
// Inputs are driven and outputs sampled at the falling edge, away from the
// active edge. A watchdog ends the run as a failure if it hangs. The
// reference models here are independent of the RTL; what they check follows
// the paper as stated in the header of the block under test.
module tb_term_update_unit;
  import vr_pkg::*;
  localparam int QX = 8, QY = 8, N = QX * QY, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0]       req_valid;
  term_req_t [1:0]  req;
  logic             req_ready, st_we, busy;
  logic [AW-1:0]    st_raddr, st_waddr;
  logic [3:0][7:0]  st_rdata, st_wdata;
  logic [3:0][7:0]  mem [N];
  logic [3:0][7:0]  ref_mem [N];
  int checks = 0, failures = 0;
  int updates = 0, cycles_busy = 0;

  term_update_unit #(.STENCIL_BITS(8), .QUADS_X(QX), .ADDR_W(AW), .LANES(2), .FIFO_DEPTH(8)) dut (
    .clk, .rst_n, .req_valid, .req, .req_ready, .st_raddr, .st_rdata,
    .st_we, .st_waddr, .st_wdata, .busy);

  assign st_rdata = mem[st_raddr];
  always_ff @(posedge clk) if (st_we) mem[st_waddr] <= st_wdata;
  always_ff @(posedge clk) begin
    if (st_we) updates <= updates + 1;
    if (busy) cycles_busy <= cycles_busy + 1;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      for (int f = 0; f < 4; f++) mem[i][f] = {1'b0, 7'($urandom)};
      ref_mem[i] = mem[i];
    end
    req_valid = '0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < 300; k++) begin
      for (int l = 0; l < 2; l++) begin
        req_valid[l] = 1'($urandom);
        req[l].qx = 11'($urandom_range(QX - 1));
        req[l].qy = 11'($urandom_range(QY - 1));
        req[l].mask = 4'($urandom_range(15, 1));
      end
      do @(negedge clk); while (!req_ready);
      for (int l = 0; l < 2; l++)
        if (req_valid[l])
          for (int f = 0; f < 4; f++)
            if (req[l].mask[f]) ref_mem[int'(req[l].qy) * QX + int'(req[l].qx)][f][7] = 1'b1;
      @(posedge clk); #1;
    end
    req_valid = '0;
    wait (!busy);
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (mem[i] !== ref_mem[i]) begin
        failures++;
        $display("FAIL word %0d got %h exp %h", i, mem[i], ref_mem[i]);
      end
    end
    $display("updates=%0d busy_cycles=%0d", updates, cycles_busy);
    // one stencil write per busy cycle
    checks++;
    if (updates != cycles_busy) begin
      failures++; $display("FAIL rate: %0d updates in %0d busy cycles", updates, cycles_busy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
