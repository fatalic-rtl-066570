// adc_digital_correction: digital correction of one pipelined ADC.
//
// A 1.5-bit-per-stage pipelined ADC delivers, per conversion, one 2-bit word
// [b2 b1] from each of its N_STAGES stages (values 0, 1 or 2; 3 never
// occurs). The word of stage s reaches this block stage_skew(s) conversion
// clocks after the word of stage 0, because the stages work one after the
// other. A shift register per stage delays each word so that all words of
// one conversion line up. The aligned words are then added with one bit of
// overlap: the MSB b2 of stage s lands on the same weight as the LSB b1 of
// stage s-1, i.e.  D = sum_s (2*b2_s + b1_s) * 2^(N_STAGES-1-s).
// The b1 bits and the b2 bits form two ready-made vectors (a carry-save pair)
// that are registered first; the carry-propagate addition of the pair is the
// second register. The result D has N_STAGES+1 bits and spans the input range
// -Vref..+Vref; the code is its ADC_BITS most significant bits (the LSB of the
// last stage is dropped), so mid-scale input gives 2047.
//
// Interface: stage_words[s] is sampled on clk when en is high (en is tied
// high for the 40 MS/s fast ADCs, and is the 833 kHz conversion strobe of the
// slow ADC). code changes only on enabled clocks.
// Timing: code for a conversion appears 2 + stage_skew(N_STAGES-1) enabled
// clocks after the word of stage 0 of that conversion (7 with the defaults;
// with the one clock the ADC takes to produce the stage-0 word, the
// conversion latency is the 8 clocks the design specifies).
// From the paper: shift-register alignment, overlapped summation of MSB onto
// previous LSB, carry-save, 12 stages, 12 bits, 8-clock total latency.
// Own choices: two stages per clock of skew, the split of the latency into
// align/carry-save/final-add registers, dropping the final LSB, saturation
// of the (never expected) overflow, asynchronous active-low reset.
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of the no-11 assertion; the assertion is not hardware.
module adc_digital_correction
  import fatalic_pkg::*;
#(
  parameter int unsigned N_ST  = N_STAGES,
  parameter int unsigned NBITS = ADC_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  stage_word_t          stage_words [N_ST],
  output logic [NBITS-1:0]     code
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned MAX_SKEW = stage_skew(N_ST - 1);
  localparam int unsigned DW       = N_ST + 2;          // room for a 2'b11 word
  localparam int unsigned DROP     = N_ST + 1 - NBITS;  // LSBs below the code

  stage_word_t aligned [N_ST];

  // Alignment shift registers: stage s is delayed by MAX_SKEW - skew(s).
  for (genvar s = 0; s < N_ST; s++) begin : g_align
    localparam int unsigned D = MAX_SKEW - stage_skew(s);
    if (D == 0) begin : g_direct
      assign aligned[s] = stage_words[s];
    end else begin : g_delay
      stage_word_t sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) sr[k] <= STAGE_MID;
        end else if (en) begin
          sr[0] <= stage_words[s];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
        end
      end
      assign aligned[s] = sr[D-1];
    end
  end

  // Carry-save pair: b1 of stage s at weight N_ST-1-s, b2 at weight N_ST-s.
  logic [N_ST-1:0] vec_b1, vec_b1_q;
  logic [N_ST:0]   vec_b2, vec_b2_q;

  always_comb begin
    vec_b2[0] = 1'b0;
    for (int s = 0; s < N_ST; s++) begin
      vec_b1[N_ST-1-s] = aligned[s][0];
      vec_b2[N_ST-s]   = aligned[s][1];
    end
  end

  // A 1.5-bit stage never produces 2'b11.
  for (genvar s = 0; s < N_ST; s++) begin : g_chk
    a_no_11 : assert property (@(posedge clk) disable iff (!rst_n) en |-> aligned[s] != 2'b11);
  end

  logic [DW-1:0] sum;
  assign sum = DW'(vec_b1_q) + DW'(vec_b2_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_b1_q <= '0;
      vec_b2_q <= '0;
      code     <= '0;
    end else if (en) begin
      vec_b1_q <= vec_b1;
      vec_b2_q <= vec_b2;
      if (sum[DW-1]) code <= '1;                  // saturate
      else           code <= sum[DROP +: NBITS];
    end
  end

endmodule
