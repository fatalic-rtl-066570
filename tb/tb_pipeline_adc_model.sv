// tb_pipeline_adc_model: self-checking testbench of the pipelined ADC model.
//
// Random voltages in +-500 mV are applied, one per clock. For each, the words
// of all 12 stages are computed here from the stage table and compared with
// stage_words[s] 1 + s/2 clocks after the sampling edge (the pipeline skew).
// A second phase uses a 1-in-48 enable (the slow-channel rate) and checks
// that the words move only on enabled edges.
module tb_pipeline_adc_model;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NS = N_STAGES;
  localparam int NSAMP = 600;

  logic clk = 1'b0, en = 1'b1;
  real v_in = 0.0;
  stage_word_t stage_words [NS];
  int checks = 0, failures = 0;

  pipeline_adc_model dut (.clk, .en, .v_in, .stage_words);

  always #12.5 clk = ~clk;

  stage_word_t w_tab [NSAMP][NS];

  task automatic convert(input real v0, input int idx);
    real v;
    v = v0;
    for (int s = 0; s < NS; s++) begin
      if (v > 0.125)       begin w_tab[idx][s] = 2'b10; v = 2.0 * v - 0.5; end
      else if (v < -0.125) begin w_tab[idx][s] = 2'b00; v = 2.0 * v + 0.5; end
      else                 begin w_tab[idx][s] = 2'b01; v = 2.0 * v;       end
    end
  endtask

  initial begin
    #(25 * 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ke;
    ke = 0;   // index of the sample taken on the next enabled edge
    for (int t = 0; t < NSAMP * 48 && ke < NSAMP; t++) begin
      @(negedge clk);
      en = (ke < NSAMP / 2) ? 1'b1 : (t % 48 == 0);
      if (en) begin
        real v;
        v = (real'($urandom_range(999999)) / 999999.0 - 0.5) * 0.999;
        v_in = v;
        convert(v, ke);
      end
      @(posedge clk);
      #1;
      if (en) begin
        // after the edge that sampled ke, stage s shows sample ke - s/2 - 1 + 1
        // i.e. the words of sample k appear after edge k + 1 + s/2
        for (int s = 0; s < NS; s++) begin
          int k;
          k = ke - 1 - stage_skew(s);
          if (k >= 0) begin
            checks++;
            if (stage_words[s] != w_tab[k][s]) begin
              failures++;
              if (failures < 10) $display("sample %0d stage %0d: %b expected %b", k, s, stage_words[s], w_tab[k][s]);
            end
          end
        end
        ke++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
