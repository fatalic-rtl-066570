// adc_stage_model: BEHAVIOURAL MODEL (analog, not synthesizable) of one
// 1.5-bit stage of the FATALIC pipelined ADC.
//
// A 2-bit flash (two comparators with thresholds at +-Vref/4, i.e. +-125 mV
// for Vref = 500 mV) classifies the held input into three regions, the DAC
// selects +Vref/2, 0 or -Vref/2 and the gain-2 switched-capacitor residue
// amplifier hands 2*(Vin - DAC) to the next stage:
//   Vin >  Vref/4          -> [10], residue 2*Vin - Vref
//   -Vref/4 <= Vin <= Vref/4 -> [01], residue 2*Vin
//   Vin < -Vref/4          -> [00], residue 2*Vin + Vref
// The code 11 never occurs; the redundancy lets the digital correction absorb
// comparator offsets up to +-Vref/4.
//
// Ports: v_in and v_res are differential voltages [V]; word is [b2 b1].
// Combinational: the sample/hold and amplification phases are represented by
// the register in pipeline_adc_model. OFFSET adds an offset to both
// comparator thresholds (0 = ideal).
// From the paper: the table of regions, words, DAC levels and residues,
// the threshold and reference values. Own choices: the equality cases go to
// [01], ideal gain of 2.
module adc_stage_model
  import fatalic_pkg::*;
#(
  parameter real VREF   = 0.5,
  parameter real OFFSET = 0.0
) (
  input  real         v_in,
  output stage_word_t word,
  output real         v_res
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    if (v_in > VREF / 4.0 + OFFSET) begin
      word  = STAGE_HIGH;
      v_res = 2.0 * v_in - VREF;
    end else if (v_in < -VREF / 4.0 + OFFSET) begin
      word  = STAGE_LOW;
      v_res = 2.0 * v_in + VREF;
    end else begin
      word  = STAGE_MID;
      v_res = 2.0 * v_in;
    end
  end

endmodule
