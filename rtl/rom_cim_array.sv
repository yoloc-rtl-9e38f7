// rom_cim_array: behavioural model of the ROM-CiM cell array and its bit lines.
//
// ROWS x COLS one-transistor cells (rom_cim_cell); cells of a row share a word
// line, cells of a column share a bit line, as in the paper. Before a
// computation every bit line is pre-charged; during it the word lines carry
// unary input pulses and each turned-on cell drains one unit of charge per
// pulse, so the charge lost by a bit line equals the sum over pulses of the
// number of rows whose word line is high and whose cell stores '1': the
// analog multiply-accumulate of the paper.
//
// Model abstraction (this design's own): the bit-line voltage is represented
// by an integer bl_level = number of discharge units since the last
// pre-charge (0 = fully charged). The precharge input plays the role of the
// paper's "Precharger". ROM contents come from yoloc_pkg::rom_bit(SEED,r,c),
// a fixed hash standing in for the mask-programmed pretrained weights.
//
// Interface: clk, rst_n, precharge, wl[ROWS] in; bl_level[COLS] out.
// Timing: bl_level updates on the clock edge that ends a pulse cycle; a
// pre-charge cycle (or reset) sets every level to 0.
module rom_cim_array
  import yoloc_pkg::*;
#(
  parameter int unsigned ROWS = yoloc_pkg::ROWS,
  parameter int unsigned COLS = yoloc_pkg::COLS,
  parameter int unsigned SEED = 1,
  parameter int unsigned LW   = $clog2(ROWS * PULSES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 precharge,
  input  logic [ROWS-1:0]      wl,
  output logic [COLS-1:0][LW-1:0] bl_level
);
  // pd[c][r]: cell (r,c) pulls bit line c down in this cycle
  logic [COLS-1:0][ROWS-1:0] pd;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      rom_cim_cell #(.FUSED(rom_bit(SEED, r, c))) u_cell (.wl(wl[r]), .bl_pd(pd[c][r]));
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bl
    logic [LW-1:0] drain;
    always_comb begin
      drain = '0;
      for (int r = 0; r < ROWS; r++) drain += LW'(pd[c][r]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)         bl_level[c] <= '0;
      else if (precharge) bl_level[c] <= '0;
      else                bl_level[c] <= bl_level[c] + drain;
    end
  end
endmodule
