// out_buffer_tb: checks that the output buffer loads on capture and holds its
// contents while the input changes.
module out_buffer_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, capture = 0;
  acc_t [N_OUT-1:0] d, q, held;
  out_buffer dut (.clk, .rst_n, .capture, .d, .q);
  always #5 clk = ~clk;
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk); for (int o = 0; o < N_OUT; o++) d[o] = $urandom; capture = 1; held = d;
      @(negedge clk); capture = 0;
      for (int k = 0; k < 3; k++) begin
        checks++; if (q != held) begin failures++; $display("FAIL t%0d k%0d", t, k); end
        for (int o = 0; o < N_OUT; o++) d[o] = $urandom;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
