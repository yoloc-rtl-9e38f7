// cache: on-chip SRAM cache (global buffer) for feature maps.
//
// Stores input, intermediate and output feature maps between CiM macro
// operations and the non-CiM steps (activation function, pooling), as the
// paper's cache does. Organisation is this design's own: DEPTH words of W
// bits, each word holding 8 activations (one row group of a CiM operation),
// one write port and one read port.
//
// Interface: write when we (on the clock edge); read when re, rdata valid
// the next cycle. A read and a write of the same address in one cycle return
// the old data.
module cache
  import yoloc_pkg::*;
#(
  parameter int unsigned DEPTH = CACHE_DEPTH,
  parameter int unsigned W     = CWORD_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
