// rom_cim_macro: ROM-based computing-in-memory macro.
//
// One 128 x 256 array of 1T ROM cells (rom_cim_array) with the peripherals of
// the paper's macro: the input driver (unary word-line pulses), 16 ADCs each
// shared by 16 adjacent columns through a column multiplexer, shift & add,
// a control sequencer and an output buffer. One operation multiplies 8
// activations (one row group of 8 word lines) by the 32 8-bit weights stored
// in each of those rows and adds the 32 dot products onto the accumulators.
// The composition follows the paper; ROM contents (SEED), row grouping,
// bit layout and sequencing are this design's own (see the sub-blocks).
//
// Interface: start/group/act/in_signed/acc_clear begin an operation (accepted
// only while busy is low); done pulses once at the end, and result[o] holds
// the 32 sums from the cycle after done. Latency: 82 cycles unsigned,
// 162 signed (see cim_ctrl).
module rom_cim_macro
  import yoloc_pkg::*;
#(
  parameter int unsigned SEED = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,

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

  rom_cim_array #(.SEED(SEED)) u_array (
    .clk, .rst_n, .precharge, .wl, .bl_level);

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
