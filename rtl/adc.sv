// adc: behavioural model of one column-shared bit-line ADC.
//
// Converts the charge a bit line has lost (bl level, in discharge units) into
// a BITS-bit code. The model is ideal: one discharge unit is one LSB and the
// code saturates at 2^BITS-1; the paper gives the 5-bit resolution and the
// sharing of 16 ADCs among 256 columns, while the transfer curve, conversion
// time and saturation are this model's own.
//
// Interface: sample + level in, code out. Timing: code is registered, valid
// the cycle after sample; it holds its value while sample is low.
module adc
  import yoloc_pkg::*;
#(
  parameter int unsigned IN_W = BL_W,
  parameter int unsigned BITS = ADC_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample,
  input  logic [IN_W-1:0] level,
  output logic [BITS-1:0] code
);
  localparam int unsigned FULL = (1 << BITS) - 1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      code <= '0;
    else if (sample) code <= (32'(level) > FULL) ? BITS'(FULL) : BITS'(level);
  end
endmodule
