// input_driver: word-line driver with unary (pulse-count) input encoding.
//
// On `load` it latches ACTIVE_ROWS 8-bit activations and whether they are
// signed. During a computation the controller walks through the activation
// digits (2 bits each) and, for each digit, three pulse cycles: in pulse cycle
// t the word line of row i of the selected row group is high when that row's
// digit is greater than t. A digit value v therefore becomes v pulses (0..3),
// the paper's unary encoding; the bit line integrates them. Splitting an 8-bit
// activation into four 2-bit digits recombined by shift & add, the row-group
// organisation and the two-pass handling of signed activations (positive
// parts in pass 0, magnitudes of negative parts in pass 1) are this design's
// own choices.
//
// Interface: load/act_in/in_signed latch the operands; group selects word
// lines 8*group .. 8*group+7; digit, pulse, pulse_en, neg_pass come from
// cim_ctrl. wl is combinational from the latched operands.
module input_driver
  import yoloc_pkg::*;
#(
  parameter int unsigned ROWS = yoloc_pkg::ROWS,
  parameter int unsigned AR   = ACTIVE_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  act_t [AR-1:0]                 act_in,
  input  logic                          in_signed,
  input  logic [$clog2(ROWS/AR)-1:0]    group,
  input  logic [$clog2(N_DIG)-1:0]      digit,
  input  logic [DIG_BITS-1:0]           pulse,
  input  logic                          pulse_en,
  input  logic                          neg_pass,
  output logic [ROWS-1:0]               wl
);
  act_t [AR-1:0]                 act_q;
  logic                          sgn_q;
  logic [$clog2(ROWS/AR)-1:0]    grp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= '0; sgn_q <= 1'b0; grp_q <= '0;
    end else if (load) begin
      act_q <= act_in; sgn_q <= in_signed; grp_q <= group;
    end
  end

  always_comb begin
    wl = '0;
    for (int i = 0; i < AR; i++) begin
      logic       is_neg;
      act_t       mag;
      logic [DIG_BITS-1:0] d;
      is_neg = sgn_q & act_q[i][ACT_BITS-1];
      mag    = is_neg ? act_t'(-act_q[i]) : act_q[i];
      if (is_neg != neg_pass) mag = '0;     // this pass does not carry this row
      d = mag[digit*DIG_BITS +: DIG_BITS];
      wl[grp_q*AR + i] = pulse_en && (d > pulse);
    end
  end
endmodule
