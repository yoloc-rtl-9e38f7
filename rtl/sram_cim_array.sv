// sram_cim_array: behavioural model of the writable SRAM-CiM cell array.
//
// Same computing behaviour as rom_cim_array (pre-charged bit lines drained by
// one unit per word-line pulse for each cell storing '1'), but the weight bits
// are held in writable cells that are loaded from off-chip at power-on. The
// paper gives the SRAM-CiM's role (ReBranch residual convolution and the
// prediction layers) but not its size or cell; this model uses the ROM-CiM
// geometry (128 x 256) and is written 32 bits at a time (own choice).
//
// Interface: write port we/wrow/wword/wdata (bits wword*32 .. wword*32+31 of
// row wrow, written on the clock edge); precharge and wl[ROWS] as in
// rom_cim_array; bl_level[COLS] = discharge units since last pre-charge.
// Cell contents are not reset (they are loaded after power-on).
module sram_cim_array
  import yoloc_pkg::*;
#(
  parameter int unsigned ROWS = yoloc_pkg::ROWS,
  parameter int unsigned COLS = yoloc_pkg::COLS,
  parameter int unsigned WW   = SRAM_WR_W,
  parameter int unsigned LW   = $clog2(ROWS * PULSES + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(ROWS)-1:0]    wrow,
  input  logic [$clog2(COLS/WW)-1:0] wword,
  input  logic [WW-1:0]              wdata,
  input  logic                       precharge,
  input  logic [ROWS-1:0]            wl,
  output logic [COLS-1:0][LW-1:0]    bl_level
);
  logic [ROWS-1:0][COLS-1:0] cells;

  always_ff @(posedge clk) begin
    if (we) cells[wrow][wword*WW +: WW] <= wdata;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bl
    logic [LW-1:0] drain;
    always_comb begin
      drain = '0;
      for (int r = 0; r < ROWS; r++) drain += LW'(cells[r][c] & wl[r]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         bl_level[c] <= '0;
      else if (precharge) bl_level[c] <= '0;
      else                bl_level[c] <= bl_level[c] + drain;
    end
  end
endmodule
