// adc_tb: checks the column ADC model: code = level for levels up to 31,
// saturation at 31 above, one-cycle latency, and that the code holds while
// sample is low.
module adc_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [BL_W-1:0] level = '0;
  logic [ADC_BITS-1:0] code;
  adc dut (.clk, .rst_n, .sample, .level, .code);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_code;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int lv;
      lv = (i < 385) ? i : $urandom_range(0, 384);
      @(negedge clk); sample = 1; level = BL_W'(lv);
      exp_code = (lv > 31) ? 31 : lv;
      @(negedge clk); sample = 0; level = BL_W'($urandom);
      checks++; if (int'(code) != exp_code) begin failures++; if (failures < 10) $display("FAIL level %0d code %0d", lv, code); end
      @(negedge clk);
      checks++; if (int'(code) != exp_code) begin failures++; if (failures < 10) $display("FAIL hold level %0d code %0d", lv, code); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
