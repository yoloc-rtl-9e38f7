// cim_ctrl: sequencer of one CiM macro operation.
//
// For each activation digit (N_DIG of them, least significant first) it runs
// one pre-charge cycle, PULSES word-line pulse cycles and SLOTS ADC cycles in
// which every shared ADC converts column slot s. Signed operations repeat the
// whole digit loop for the negative pass. The shift & add control
// (sa_valid/sa_slot/sa_digit/sa_neg) trails adc_sample by one cycle, matching
// the ADC's registered output. The paper names the macro's control block and
// gives pre-charge, unary pulses and ADC sharing; this sequence and its
// timing are this design's own.
//
// Interface: start (with in_signed, acc_clear) is taken only when idle.
// Latency from start to the done pulse:
//   passes * N_DIG * (1 + PULSES + SLOTS) + 2 cycles (82 unsigned, 162 signed).
// busy is high from the cycle after start until done.
module cim_ctrl
  import yoloc_pkg::*;
#(
  parameter int unsigned ND    = N_DIG,
  parameter int unsigned NP    = PULSES,
  parameter int unsigned SLOTS = COLS_PER_ADC
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      in_signed,
  input  logic                      acc_clear,
  output logic                      drv_load,
  output logic                      precharge,
  output logic                      pulse_en,
  output logic [DIG_BITS-1:0]       pulse,
  output logic [$clog2(ND)-1:0]     digit,
  output logic                      neg_pass,
  output logic                      adc_sample,
  output logic [$clog2(SLOTS)-1:0]  slot,
  output logic                      sa_clear,
  output logic                      sa_valid,
  output logic [$clog2(SLOTS)-1:0]  sa_slot,
  output logic [$clog2(ND)-1:0]     sa_digit,
  output logic                      sa_neg,
  output logic                      busy,
  output logic                      done
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_PULSE, S_CONV, S_FLUSH, S_DONE} state_e;
  state_e state;
  logic   sgn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sgn_q <= 1'b0; pulse <= '0; digit <= '0; neg_pass <= 1'b0; slot <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          sgn_q <= in_signed; digit <= '0; neg_pass <= 1'b0; state <= S_PRE;
        end
        S_PRE: begin pulse <= '0; state <= S_PULSE; end
        S_PULSE: if (int'(pulse) == NP - 1) begin slot <= '0; state <= S_CONV; end
                 else pulse <= pulse + 1'b1;
        S_CONV: if (int'(slot) == SLOTS - 1) begin
          if (int'(digit) != ND - 1) begin digit <= digit + 1'b1; state <= S_PRE; end
          else if (sgn_q && !neg_pass) begin neg_pass <= 1'b1; digit <= '0; state <= S_PRE; end
          else state <= S_FLUSH;
        end else slot <= slot + 1'b1;
        S_FLUSH: state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    drv_load   = (state == S_IDLE) && start;
    sa_clear   = (state == S_IDLE) && start && acc_clear;
    precharge  = (state == S_PRE);
    pulse_en   = (state == S_PULSE);
    adc_sample = (state == S_CONV);
    busy       = (state != S_IDLE);
    done       = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_valid <= 1'b0; sa_slot <= '0; sa_digit <= '0; sa_neg <= 1'b0;
    end else begin
      sa_valid <= adc_sample; sa_slot <= slot; sa_digit <= digit; sa_neg <= neg_pass;
    end
  end

  // a start while busy would be lost
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
endmodule
