// digital_block: the synthesizable digital part of FATALIC.
//
// It receives the raw stage words of the four pipelined ADCs (high-, medium-
// and low-gain fast channels at 40 MS/s, slow channel at 833 kS/s) and
//  * turns each into a 12-bit code (adc_digital_correction, one per ADC);
//  * chooses the alternative gain between high and low gain from the low-gain
//    code (gain_selector), unless force_lg pins it to low gain;
//  * sends the medium-gain code on the rising edge and the alternative code
//    on the falling edge of the clock over 12 pins, with the gain flag
//    (fast_output_ddr);
//  * times the slow ADC and sends its codes serially at 10 Mbit/s on one pin
//    (slow_serializer), whose conversion strobe slow_conv_en also clocks the
//    slow ADC.
//
// Timing (defaults): a fast sample taken by the ADCs on rising edge n is on
// dout as medium-gain data during the high phase after edge n+9 (8 clocks of
// ADC conversion latency plus the output register) and as alternative data
// in the low phase that follows. The slow code of a conversion is sent in the
// serial frame that starts after it has been corrected.
// From the paper: the functions of the block and their numbers. Own choices:
// the partitioning into sub-modules and the register boundaries between them.
module digital_block
  import fatalic_pkg::*;
#(
  parameter int unsigned N_ST      = N_STAGES,
  parameter int unsigned NBITS     = ADC_BITS,
  parameter int unsigned THRESHOLD = LG_THRESHOLD,
  parameter int unsigned DIV       = SLOW_DIV,
  parameter int unsigned BIT_CLKS  = SLOW_BIT_CLKS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             force_lg,
  input  stage_word_t      hg_words   [N_ST],
  input  stage_word_t      mg_words   [N_ST],
  input  stage_word_t      lg_words   [N_ST],
  input  stage_word_t      slow_words [N_ST],
  output logic [NBITS-1:0] dout,
  output alt_gain_e        gain_flag,
  output logic             slow_sdata,
  output logic             slow_conv_en
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [NBITS-1:0] hg_code, mg_code, lg_code, slow_code, alt_code;
  alt_gain_e        alt_gain;

  adc_digital_correction #(.N_ST(N_ST), .NBITS(NBITS)) u_corr_hg (
    .clk, .rst_n, .en(1'b1), .stage_words(hg_words), .code(hg_code));
  adc_digital_correction #(.N_ST(N_ST), .NBITS(NBITS)) u_corr_mg (
    .clk, .rst_n, .en(1'b1), .stage_words(mg_words), .code(mg_code));
  adc_digital_correction #(.N_ST(N_ST), .NBITS(NBITS)) u_corr_lg (
    .clk, .rst_n, .en(1'b1), .stage_words(lg_words), .code(lg_code));
  adc_digital_correction #(.N_ST(N_ST), .NBITS(NBITS)) u_corr_slow (
    .clk, .rst_n, .en(slow_conv_en), .stage_words(slow_words), .code(slow_code));

  gain_selector #(.NBITS(NBITS), .THRESHOLD(THRESHOLD)) u_gain_sel (
    .hg_code, .lg_code, .force_lg, .alt_code, .alt_gain);

  fast_output_ddr #(.NBITS(NBITS)) u_ddr (
    .clk, .rst_n, .mg_code, .alt_code, .alt_gain_in(alt_gain), .dout, .gain_flag);

  slow_serializer #(.NBITS(NBITS), .DIV(DIV), .BIT_CLKS(BIT_CLKS)) u_slow_ser (
    .clk, .rst_n, .slow_code, .conv_en(slow_conv_en), .sdata(slow_sdata));

endmodule
