// sram_cim_macro: SRAM-based computing-in-memory macro (writable weights).
//
// Same peripherals and operation as rom_cim_macro (input driver, 16 column-
// shared ADCs, shift & add, control, output buffer) around a writable
// 128 x 256 SRAM-CiM array. In the chip it holds the trainable ReBranch
// residual-convolution weights and the prediction layers, loaded from
// off-chip memory at power-on through the 32-bit write port. Reusing the ROM
// macro's peripherals and geometry is this design's choice; the paper does
// not give the SRAM-CiM size.
//
// Interface: start/group/act/in_signed/acc_clear begin an operation (accepted
// only while busy is low); done pulses once at the end, and result[o] holds
// the 32 sums from the cycle after done. Latency: 82 cycles unsigned,
// 162 signed (see cim_ctrl).
module sram_cim_macro
  import yoloc_pkg::*;
#(
  parameter int unsigned WW = SRAM_WR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [$clog2(ROWS)-1:0]       wrow,
  input  logic [$clog2(COLS/WW)-1:0]    wword,
  input  logic [WW-1:0]                 wdata,
  input  logic                          start,
  input  logic [$clog2(GROUPS)-1:0]     group,
  input  act_t [ACTIVE_ROWS-1:0]        act,
  input  logic                          in_signed,
  input  logic                          acc_clear,
  output logic                          busy,
  output logic                          done,
  output acc_t [N_OUT-1:0]              result
);
  logic                             drv_load, precharge, pulse_en, neg_pass, adc_sample;
  logic [DIG_BITS-1:0]              pulse;
  logic [$clog2(N_DIG)-1:0]         digit, sa_digit;
  logic [$clog2(COLS_PER_ADC)-1:0]  slot, sa_slot;
  logic                             sa_clear, sa_valid, sa_neg;
  logic [ROWS-1:0]                  wl;
  logic [COLS-1:0][BL_W-1:0]        bl_level;
  logic [N_ADC-1:0][ADC_BITS-1:0]   code;
  acc_t [N_OUT-1:0]                 acc;

  cim_ctrl u_ctrl (
    .clk, .rst_n, .start, .in_signed, .acc_clear, .drv_load, .precharge, .pulse_en,
    .pulse, .digit, .neg_pass, .adc_sample, .slot, .sa_clear, .sa_valid, .sa_slot,
    .sa_digit, .sa_neg, .busy, .done);

  input_driver u_drv (
    .clk, .rst_n, .load(drv_load), .act_in(act), .in_signed, .group, .digit, .pulse,
    .pulse_en, .neg_pass, .wl);

  sram_cim_array #(.WW(WW)) u_array (
    .clk, .rst_n, .we, .wrow, .wword, .wdata, .precharge, .wl, .bl_level);

  // column multiplexer: ADC k converts column COLS_PER_ADC*k + slot
  for (genvar k = 0; k < N_ADC; k++) begin : g_adc
    adc u_adc (.clk, .rst_n, .sample(adc_sample),
               .level(bl_level[k*COLS_PER_ADC + int'(slot)]), .code(code[k]));
  end

  shift_add u_sa (
    .clk, .rst_n, .clear(sa_clear), .valid(sa_valid), .slot(sa_slot), .digit(sa_digit),
    .neg(sa_neg), .code, .acc);

  out_buffer u_obuf (.clk, .rst_n, .capture(done), .d(acc), .q(result));
endmodule
