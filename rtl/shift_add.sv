// shift_add: shift-and-add accumulator behind the column-shared ADCs.
//
// Each 8-bit weight occupies W_BITS adjacent columns, bit b in column
// W_BITS*o + b; ADC k serves columns COLS_PER_ADC*k .. COLS_PER_ADC*k+15 and
// converts one of them per slot. A code c read at slot s, activation digit d
// is the partial count for weight bit b = s mod 8 of output
// o = k*(COLS_PER_ADC/W_BITS) + s/8, so the accumulator adds
// c << (b + 2d), negated for the weight sign bit (b = 7, two's complement) and
// negated again in the negative-activation pass. Accumulators are kept across
// operations unless cleared, so several row groups (more input channels), and
// the trunk and Res-Decompress results of a ReBranch layer (the "+" that
// merges trunk and branch), add into the same sums. The paper names the
// "Shift & Add" block; the column layout, sign handling and accumulation are
// this design's own.
//
// Interface: clear zeroes all sums; valid with slot/digit/neg/code adds one
// ADC slot's codes. acc[o] is registered.
module shift_add
  import yoloc_pkg::*;
#(
  parameter int unsigned NA   = N_ADC,
  parameter int unsigned CPA  = COLS_PER_ADC,
  parameter int unsigned WB   = W_BITS,
  parameter int unsigned AB   = ADC_BITS,
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned NO   = NA * CPA / WB
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         valid,
  input  logic [$clog2(CPA)-1:0]       slot,
  input  logic [$clog2(N_DIG)-1:0]     digit,
  input  logic                         neg,
  input  logic [NA-1:0][AB-1:0]        code,
  output logic signed [NO-1:0][AW-1:0] acc
);
  localparam int unsigned OPA = CPA / WB;   // outputs per ADC

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clear) acc <= '0;
    else if (valid) begin
      for (int k = 0; k < NA; k++) begin
        int unsigned o, b;
        logic signed [AW-1:0] term;
        o    = k * OPA + int'(slot) / WB;
        b    = int'(slot) % WB;
        term = AW'(code[k]) <<< (b + DIG_BITS * int'(digit));
        if ((b == WB - 1) != neg) acc[o] <= acc[o] - term;
        else                      acc[o] <= acc[o] + term;
      end
    end
  end
endmodule
