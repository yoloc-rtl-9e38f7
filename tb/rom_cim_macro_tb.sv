// rom_cim_macro_tb: runs operations on the full ROM-CiM macro (SEED 2) with
// random unsigned and signed activations on random row groups, accumulating
// over several operations, and checks all 32 results against dot products
// computed from the reference ROM contents, plus the 82/162-cycle latency.
module rom_cim_macro_tb;
  import yoloc_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, in_signed = 0, acc_clear = 0, busy, done;
  logic [3:0] group;
  act_t [ACTIVE_ROWS-1:0] act;
  acc_t [N_OUT-1:0] result;
  longint ref_acc [N_OUT];


  rom_cim_macro #(.SEED(SEED)) dut (.clk, .rst_n, .start, .group, .act, .in_signed, .acc_clear,
                                      .busy, .done, .result);
  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic op(int g, bit sg, bit clr);
    int cyc = 0;
    @(negedge clk);
    start = 1; group = 4'(g); in_signed = sg; acc_clear = clr;
    for (int i = 0; i < ACTIVE_ROWS; i++) act[i] = 8'($urandom_range(0, 255));
    if (clr) foreach (ref_acc[o]) ref_acc[o] = 0;
    for (int i = 0; i < ACTIVE_ROWS; i++) begin
      int r; r = g * ACTIVE_ROWS + i;
      for (int o = 0; o < N_OUT; o++) ref_acc[o] += longint'(ref_act(act[i], sg)) * ref_rom_w(SEED, r, o);
    end
    @(negedge clk); start = 0; act = '0; cyc = 1;
    while (!done && cyc < 500) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (sg ? 2 : 1) * N_DIG * 20 + 2) begin failures++; $display("FAIL latency %0d", cyc); end
    @(negedge clk);
    for (int o = 0; o < N_OUT; o++) begin
      checks++;
      if (longint'(result[o]) != ref_acc[o]) begin
        failures++; if (failures < 10) $display("FAIL group %0d signed %0d out %0d got %0d exp %0d", g, sg, o, result[o], ref_acc[o]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;

    op(0, 0, 1);
    op(5, 0, 0);
    op(15, 1, 0);
    op($urandom_range(0, 15), 1, 1);
    for (int t = 0; t < 8; t++) op($urandom_range(0, 15), 1'($urandom_range(0, 1)), 1'(t % 3 == 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
