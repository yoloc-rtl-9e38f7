// rom_cim_array_tb: applies random word-line patterns to the full 128 x 256 ROM
// array and checks every bit line's discharge count against the sum over
// cycles of the number of driven rows whose reference ROM bit is 1; checks
// that pre-charge returns every bit line to 0.
module rom_cim_array_tb;
  import yoloc_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, precharge = 0;
  logic [ROWS-1:0] wl = '0;
  logic [COLS-1:0][BL_W-1:0] bl_level;
  int exp_lvl [COLS];
  bit rb [ROWS][COLS];

  rom_cim_array #(.SEED(SEED)) dut (.clk, .rst_n, .precharge, .wl, .bl_level);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) rb[r][c] = ref_rom_bit(SEED, r, c);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      @(negedge clk); precharge = 1; wl = '0;
      @(negedge clk); precharge = 0;
      foreach (exp_lvl[c]) exp_lvl[c] = 0;
      checks++; if (bl_level != '0) begin failures++; $display("FAIL precharge"); end
      for (int p = 0; p < 3; p++) begin
        // drive a random subset of (trial==3: all) rows for one cycle
        for (int r = 0; r < ROWS; r++) wl[r] = (trial == 3) ? 1'b1 : 1'($urandom_range(0, 3) == 0);
        for (int r = 0; r < ROWS; r++) if (wl[r]) for (int c = 0; c < COLS; c++) exp_lvl[c] += rb[r][c];
        @(negedge clk);
      end
      wl = '0;
      @(negedge clk);   // an idle cycle must not change the levels
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (int'(bl_level[c]) != exp_lvl[c]) begin
          failures++; if (failures < 10) $display("FAIL trial %0d col %0d got %0d exp %0d", trial, c, bl_level[c], exp_lvl[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
