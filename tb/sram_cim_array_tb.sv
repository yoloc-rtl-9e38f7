// sram_cim_array_tb: writes random weight bits into the whole SRAM-CiM array
// through the 32-bit port, then applies random word-line patterns and checks
// every bit line's discharge count against the written contents; rewrites
// one row and checks that the change shows in the next computation.
module sram_cim_array_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, precharge = 0, we = 0;
  logic [6:0] wrow; logic [2:0] wword; logic [31:0] wdata;
  logic [ROWS-1:0] wl = '0;
  logic [COLS-1:0][BL_W-1:0] bl_level;
  bit mem [ROWS][COLS];
  int exp_lvl [COLS];

  sram_cim_array dut (.clk, .rst_n, .we, .wrow, .wword, .wdata, .precharge, .wl, .bl_level);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(int r, int w, logic [31:0] d);
    @(negedge clk); we = 1; wrow = 7'(r); wword = 3'(w); wdata = d;
    for (int i = 0; i < 32; i++) mem[r][32*w + i] = d[i];
    @(negedge clk); we = 0;
  endtask

  task automatic compute(int trial);
    @(negedge clk); precharge = 1; wl = '0;
    @(negedge clk); precharge = 0;
    foreach (exp_lvl[c]) exp_lvl[c] = 0;
    for (int p = 0; p < 3; p++) begin
      for (int r = 0; r < ROWS; r++) wl[r] = 1'($urandom_range(0, 3) == 0);
      for (int r = 0; r < ROWS; r++) if (wl[r]) for (int c = 0; c < COLS; c++) exp_lvl[c] += mem[r][c];
      @(negedge clk);
    end
    wl = '0;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(bl_level[c]) != exp_lvl[c]) begin
        failures++; if (failures < 10) $display("FAIL trial %0d col %0d got %0d exp %0d", trial, c, bl_level[c], exp_lvl[c]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) for (int w = 0; w < 8; w++) wr(r, w, $urandom);
    compute(0);
    compute(1);
    for (int w = 0; w < 8; w++) wr(5, w, 32'hFFFF_FFFF);
    for (int w = 0; w < 8; w++) wr(6, w, 32'h0);
    compute(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
