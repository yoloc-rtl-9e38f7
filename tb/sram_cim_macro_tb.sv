// sram_cim_macro_tb: loads random weights into the SRAM-CiM macro through its
// 32-bit write port, runs operations with random unsigned and signed
// activations on random row groups (accumulating over several), checks all
// 32 results against reference dot products and the 82/162-cycle latency;
// then reloads some weights and checks the results follow.
module sram_cim_macro_tb;
  import yoloc_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, in_signed = 0, acc_clear = 0, busy, done;
  logic [3:0] group;
  act_t [ACTIVE_ROWS-1:0] act;
  acc_t [N_OUT-1:0] result;
  longint ref_acc [N_OUT];
  logic we = 0; logic [6:0] wrow; logic [2:0] wword; logic [31:0] wdata;
  int wmem [ROWS][N_OUT];
  task automatic load_row(int r);
    logic [255:0] bits;
    for (int o = 0; o < N_OUT; o++) begin
      int v; v = $urandom_range(0, 255) - 128; wmem[r][o] = v; bits[8*o +: 8] = 8'(v);
    end
    for (int w = 0; w < 8; w++) begin
      @(negedge clk); we = 1; wrow = 7'(r); wword = 3'(w); wdata = bits[32*w +: 32];
    end
    @(negedge clk); we = 0;
  endtask

  sram_cim_macro dut (.clk, .rst_n, .we, .wrow, .wword, .wdata, .start, .group, .act, .in_signed,
                     .acc_clear, .busy, .done, .result);
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
      for (int o = 0; o < N_OUT; o++) ref_acc[o] += longint'(ref_act(act[i], sg)) * wmem[r][o];
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
    for (int r = 0; r < ROWS; r++) load_row(r);
    op(0, 0, 1);
    op(5, 0, 0);
    op(15, 1, 0);
    op($urandom_range(0, 15), 1, 1);
    for (int t = 0; t < 8; t++) op($urandom_range(0, 15), 1'($urandom_range(0, 1)), 1'(t % 3 == 0));
    load_row(3); load_row(4);
    op(0, 0, 1);
    op(0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
