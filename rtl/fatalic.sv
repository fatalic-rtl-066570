// fatalic: the complete FATALIC front-end chip for one PMT, with behavioural
// models of its analog parts (not synthesizable as a whole; the synthesizable
// part is digital_block).
//
// Signal path: the PMT current enters the current conveyor, which splits it
// into the high-gain (x64), medium-gain (x8) and low-gain (x1) fast channels
// and the slow channel (about 87% of the current). Each fast channel has a
// 25 ns transimpedance shaper and a 12-bit 40 MS/s pipelined ADC; the slow
// channel has a 100 us integrating shaper and a 12-bit 833 kS/s pipelined
// ADC. The digital block corrects the four ADC outputs, selects the
// alternative gain and drives the outputs:
//  * dout[11:0]: medium-gain code while clk is high, alternative-gain code
//    (high or low gain) while clk is low;
//  * gain_flag: which gain the alternative code is (ALT_LOW_GAIN = 1);
//  * slow_sdata: slow-channel codes, 12 bits MSB first, 10 Mbit/s.
// force_lg is the input bit that forces low gain on the alternative output.
// i_pmt is the PMT anode current [A] (negative polarity); i_ped_* are the
// pedestal tuning currents [A] added to each channel by the conveyor DAC.
//
// Timing: all fast ADCs sample on the rising clock edge; a sample taken on
// edge n appears on dout during the high phase after edge n+9 (8-clock ADC
// latency plus the output register), its alternative-gain code in the low
// phase after it. One slow code is sent every 48 clocks (1.2 us).
// From the paper: the channel structure, gains, time constants, converters,
// latency, output scheme. Own choices are listed in the sub-modules.
module fatalic
  import fatalic_pkg::*;
#(
  parameter real FAST_R_OHM = 5.0e3,
  parameter real FAST_C_F   = 5.0e-12,
  parameter real SLOW_R_OHM = 500.0e3,
  parameter real SLOW_C_F   = 200.0e-12,
  parameter real VREF       = 0.5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               force_lg,
  input  real                i_pmt,
  input  real                i_ped_hg,
  input  real                i_ped_mg,
  input  real                i_ped_lg,
  input  real                i_ped_slow,
  output logic [ADC_BITS-1:0] dout,
  output alt_gain_e          gain_flag,
  output logic               slow_sdata
);
  timeunit 1ns;
  timeprecision 1ps;

  real i_hg, i_mg, i_lg, i_slow;
  real v_hg, v_mg, v_lg, v_slow;
  stage_word_t hg_words [N_STAGES];
  stage_word_t mg_words [N_STAGES];
  stage_word_t lg_words [N_STAGES];
  stage_word_t slow_words [N_STAGES];
  logic slow_conv_en;

  current_conveyor_model u_conveyor (
    .i_pmt,
    .i_dac_hg(i_ped_hg), .i_dac_mg(i_ped_mg), .i_dac_lg(i_ped_lg), .i_dac_slow(i_ped_slow),
    .i_hg, .i_mg, .i_lg, .i_slow);

  shaper_model #(.R_OHM(FAST_R_OHM), .C_F(FAST_C_F), .DT_NS(0.5)) u_shaper_hg (.i_in(i_hg), .v_out(v_hg));
  shaper_model #(.R_OHM(FAST_R_OHM), .C_F(FAST_C_F), .DT_NS(0.5)) u_shaper_mg (.i_in(i_mg), .v_out(v_mg));
  shaper_model #(.R_OHM(FAST_R_OHM), .C_F(FAST_C_F), .DT_NS(0.5)) u_shaper_lg (.i_in(i_lg), .v_out(v_lg));
  shaper_model #(.R_OHM(SLOW_R_OHM), .C_F(SLOW_C_F), .DT_NS(5.0)) u_shaper_slow (.i_in(i_slow), .v_out(v_slow));

  pipeline_adc_model #(.VREF(VREF)) u_adc_hg (.clk, .en(1'b1), .v_in(v_hg), .stage_words(hg_words));
  pipeline_adc_model #(.VREF(VREF)) u_adc_mg (.clk, .en(1'b1), .v_in(v_mg), .stage_words(mg_words));
  pipeline_adc_model #(.VREF(VREF)) u_adc_lg (.clk, .en(1'b1), .v_in(v_lg), .stage_words(lg_words));
  pipeline_adc_model #(.VREF(VREF)) u_adc_slow (.clk, .en(slow_conv_en), .v_in(v_slow), .stage_words(slow_words));

  digital_block u_digital (
    .clk, .rst_n, .force_lg,
    .hg_words, .mg_words, .lg_words, .slow_words,
    .dout, .gain_flag, .slow_sdata, .slow_conv_en);

endmodule
