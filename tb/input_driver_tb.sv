// input_driver_tb: latches random unsigned and signed activations into the
// word-line driver and, for every row group tried, digit, pulse index and
// sign pass, checks all 128 word lines: a row outside the group is low, a row
// in the group is high when its 2-bit digit (of the magnitude belonging to
// this pass) exceeds the pulse index, i.e. a digit v gives v pulses.
module input_driver_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, in_signed = 0, pulse_en = 0, neg_pass = 0;
  act_t [ACTIVE_ROWS-1:0] act_in;
  logic [3:0] group; logic [1:0] digit, pulse;
  logic [ROWS-1:0] wl;
  int pulses [ROWS];
  act_t saved [ACTIVE_ROWS];

  input_driver dut (.clk, .rst_n, .load, .act_in, .in_signed, .group, .digit, .pulse,
                    .pulse_en, .neg_pass, .wl);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int g, v, mag, d;
      bit sg;
      g  = $urandom_range(0, GROUPS - 1);
      sg = (t % 2 == 1);
      @(negedge clk);
      load = 1; in_signed = sg; group = 4'(g);
      for (int i = 0; i < ACTIVE_ROWS; i++) act_in[i] = (t == 0) ? 8'(8'hFF - i) : 8'($urandom_range(0, 255));
      if (t == 1) act_in[0] = 8'h80;   // -128
      for (int i = 0; i < ACTIVE_ROWS; i++) saved[i] = act_in[i];
      @(negedge clk); load = 0; group = 4'($urandom); act_in = '0; in_signed = 0;  // latched values must be used
      for (int np = 0; np < 2; np++) begin
        for (int dg = 0; dg < N_DIG; dg++) begin
          foreach (pulses[r]) pulses[r] = 0;
          for (int p = 0; p < 4; p++) begin   // pulse index 3 with pulse_en low as well
            neg_pass = 1'(np); digit = 2'(dg); pulse = 2'(p % 3); pulse_en = (p < 3);
            #1;
            for (int r = 0; r < ROWS; r++) if (wl[r]) pulses[r]++;
            @(negedge clk);
          end
          for (int r = 0; r < ROWS; r++) begin
            int expect_p;
            expect_p = 0;
            if (r / ACTIVE_ROWS == g) begin
              v = saved[r % ACTIVE_ROWS];
              v = sg ? ((v >= 128) ? v - 256 : v) : v;
              if (np == 0) mag = (v > 0) ? v : 0; else mag = (v < 0) ? -v : 0;
              d = (mag >> (2 * dg)) & 3;
              expect_p = d;
            end
            checks++;
            if (pulses[r] != expect_p) begin
              failures++; if (failures < 10) $display("FAIL t%0d row %0d pass %0d digit %0d: %0d pulses, exp %0d", t, r, np, dg, pulses[r], expect_p);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
