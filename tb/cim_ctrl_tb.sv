// cim_ctrl_tb: runs unsigned and signed operations through the macro
// sequencer and checks, per operation, the start-to-done latency
// (passes*4*20+2), the number of pre-charge, pulse and ADC cycles, that pulses
// follow a pre-charge with indices 0,1,2, that each digit converts slots
// 0..15, that shift & add sees each sample one cycle later, the clear pulse,
// and the busy window.
module cim_ctrl_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, in_signed = 0, acc_clear = 0;
  logic drv_load, precharge, pulse_en, neg_pass, adc_sample, sa_clear, sa_valid, sa_neg, busy, done;
  logic [1:0] pulse, digit, sa_digit; logic [3:0] slot, sa_slot;

  cim_ctrl dut (.clk, .rst_n, .start, .in_signed, .acc_clear, .drv_load, .precharge, .pulse_en,
    .pulse, .digit, .neg_pass, .adc_sample, .slot, .sa_clear, .sa_valid, .sa_slot, .sa_digit,
    .sa_neg, .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(bit sg, bit clr);
    int cyc = 0, npre = 0, npul = 0, nconv = 0, nsa = 0, nclr = 0, nload = 0, nbusy = 0;
    int exp_pulse = 0, exp_slot = 0, last_slot = -1, last_dig = 0, last_neg = 0;
    bit order_ok = 1, sa_ok = 1;
    int passes = sg ? 2 : 1;
    @(negedge clk); start = 1; in_signed = sg; acc_clear = clr;
    #1; if (sa_clear) nclr++; if (drv_load) nload++;
    @(negedge clk); start = 0; in_signed = 0; acc_clear = 0;
    cyc = 1;
    while (!done && cyc < 400) begin
      if (busy) nbusy++;
      if (precharge) begin npre++; exp_pulse = 0; end
      if (pulse_en) begin npul++; if (int'(pulse) != exp_pulse) order_ok = 0; exp_pulse++; exp_slot = 0; end
      if (adc_sample) begin
        nconv++; if (int'(slot) != exp_slot) order_ok = 0; exp_slot++;
        last_slot = slot; last_dig = digit; last_neg = neg_pass;
      end
      if (sa_clear) nclr++;
      @(negedge clk); cyc++;
      if (sa_valid) begin nsa++; end
    end
    chk(cyc == passes * N_DIG * (1 + PULSES + 16) + 2, $sformatf("latency %0d signed=%0d", cyc, sg));
    chk(npre == passes * N_DIG, $sformatf("precharge count %0d", npre));
    chk(npul == passes * N_DIG * PULSES, $sformatf("pulse count %0d", npul));
    chk(nconv == passes * N_DIG * 16, $sformatf("conversion count %0d", nconv));
    chk(nsa == passes * N_DIG * 16, $sformatf("shift-add count %0d", nsa));
    chk(order_ok, "pulse/slot order");
    chk(nclr == (clr ? 1 : 0), "clear pulse");
    chk(nload == 1, "driver load");
    chk(nbusy == cyc - 1, $sformatf("busy cycles %0d", nbusy));
    chk(last_dig == N_DIG - 1 && last_neg == (sg ? 1 : 0) && last_slot == 15, "last digit/pass");
    @(negedge clk);
    chk(!busy && !done, "idle after done");
  endtask

  // shift & add control must be the ADC control delayed by one cycle
  logic p_sample; logic [3:0] p_slot; logic [1:0] p_digit; logic p_neg;
  always @(negedge clk) begin
    if (rst_n && sa_valid) begin
      checks++;
      if (!(p_sample && sa_slot == p_slot && sa_digit == p_digit && sa_neg == p_neg)) begin
        failures++; $display("FAIL shift-add alignment");
      end
    end
    p_sample <= adc_sample; p_slot <= slot; p_digit <= digit; p_neg <= neg_pass;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(0, 1); run(1, 0); run(1, 1); run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
