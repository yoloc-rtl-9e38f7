// shift_add_tb: feeds random ADC codes for every slot, digit and sign pass and
// checks all 32 sums against a reference in which ADC k, slot s reads column
// 16k+s = weight o = col/8, bit b = col%8, worth -128 for b = 7 and 2^b
// otherwise, times 4^digit, negated in the negative pass; checks that sums
// accumulate across runs until clear.
module shift_add_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, neg = 0;
  logic [3:0] slot; logic [1:0] digit;
  logic [N_ADC-1:0][ADC_BITS-1:0] code;
  acc_t [N_OUT-1:0] acc;
  longint ref_acc [N_OUT];

  shift_add dut (.clk, .rst_n, .clear, .valid, .slot, .digit, .neg, .code, .acc);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare(string tag);
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (longint'(acc[o]) != ref_acc[o]) begin
        failures++; if (failures < 10) $display("FAIL %s out %0d got %0d exp %0d", tag, o, acc[o], ref_acc[o]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (ref_acc[o]) ref_acc[o] = 0;
    for (int run = 0; run < 6; run++) begin
      if (run == 3) begin
        @(negedge clk); clear = 1; foreach (ref_acc[o]) ref_acc[o] = 0;
        @(negedge clk); clear = 0;
        compare("clear");
      end
      for (int np = 0; np < 2; np++)
        for (int d = 0; d < N_DIG; d++)
          for (int s = 0; s < 16; s++) begin
            @(negedge clk);
            valid = ($urandom_range(0, 7) != 0); slot = 4'(s); digit = 2'(d); neg = 1'(np);
            for (int k = 0; k < N_ADC; k++) begin
              int col, o, b; longint wv;
              code[k] = 5'($urandom_range(0, 31));
              col = 16 * k + s; o = col / 8; b = col % 8;
              wv = (b == 7) ? -128 : (1 << b);
              if (valid) ref_acc[o] += (np ? -1 : 1) * wv * (1 << (2 * d)) * longint'(code[k]);
            end
          end
      @(negedge clk); valid = 0;
      compare("run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
