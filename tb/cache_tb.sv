// cache_tb: writes random words to random addresses of the 4096 x 64-bit
// cache, reads them back (one-cycle read latency), and checks that a read in
// the cycle of a write to the same address returns the old word.
module cache_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [CADDR_W-1:0] waddr, raddr;
  cword_t wdata, rdata;
  cword_t model [int];
  cache dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int a;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk); we = 1; a = (i < 16) ? i : ((i < 32) ? CACHE_DEPTH - 1 - (i - 16) : $urandom_range(0, CACHE_DEPTH - 1));
      waddr = CADDR_W'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[k]) begin
      @(negedge clk); re = 1; raddr = CADDR_W'(k);
      @(negedge clk); re = 0;
      checks++; if (rdata != model[k]) begin failures++; if (failures < 10) $display("FAIL addr %0d", k); end
    end
    // read during write of the same address returns the old value
    @(negedge clk); re = 1; raddr = 12'd7; we = 1; waddr = 12'd7; wdata = ~model[7];
    @(negedge clk); re = 0; we = 0;
    checks++; if (rdata != model[7]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk); re = 1; raddr = 12'd7;
    @(negedge clk); re = 0;
    checks++; if (rdata != ~model[7]) begin failures++; $display("FAIL write after rdw"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
