// tb_adc_stage_model: self-checking testbench of one 1.5-bit pipeline stage.
//
// Sweeps the input over the full +-500 mV range in 1 mV steps (plus points
// just around the +-125 mV thresholds) and checks the 2-bit word and the
// residue against the stage table: [10] and 2*Vin - Vref above Vref/4,
// [01] and 2*Vin between -Vref/4 and Vref/4, [00] and 2*Vin + Vref below
// -Vref/4; the residue must stay within +-Vref.
module tb_adc_stage_model;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  real v_in, v_res;
  stage_word_t word;
  int checks = 0, failures = 0;
  int seen [3] = '{0, 0, 0};

  adc_stage_model #(.VREF(0.5)) dut (.v_in, .word, .v_res);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pts [4] = '{0.1249, 0.1251, -0.1249, -0.1251};
    for (int i = 0; i < 1001 + 4; i++) begin
      stage_word_t ew;
      real er;
      v_in = (i < 1001) ? (i - 500) * 1.0e-3 : pts[i - 1001];
      #1;
      if (v_in > 0.125)       begin ew = 2'b10; er = 2.0 * v_in - 0.5; end
      else if (v_in < -0.125) begin ew = 2'b00; er = 2.0 * v_in + 0.5; end
      else                    begin ew = 2'b01; er = 2.0 * v_in;       end
      checks++;
      if (word != ew || v_res - er > 1.0e-12 || er - v_res > 1.0e-12 ||
          v_res > 0.5 + 1.0e-12 || v_res < -0.5 - 1.0e-12) begin
        failures++;
        if (failures < 10) $display("vin=%g: word %b res %g expected %b %g", v_in, word, v_res, ew, er);
      end
      seen[word]++;
    end
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
