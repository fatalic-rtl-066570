// pipeline_adc_model: BEHAVIOURAL MODEL (analog, not synthesizable) of the
// FATALIC 12-bit pipelined ADC without its digital correction.
//
// N_ST cascaded 1.5-bit stages (adc_stage_model) convert a differential input
// in the range +-VREF (+-500 mV). On every clock edge where en is high the
// input is sampled and held; the chain of stages resolves one 2-bit word per
// stage. In the real converter each stage works on the residue of the one
// before it half a clock later, so the word of stage s leaves the converter
// 1 + stage_skew(s) conversion clocks after the sampling edge (stage 0 after
// 1 clock, stages 10 and 11 after 6 clocks with the defaults). The model
// reproduces that by passing each word through 1 + stage_skew(s) registers.
//
// Interface: clk, en (tied high for the 40 MS/s fast ADCs; the 833 kHz
// strobe for the slow ADC), v_in [V], stage_words[s] = [b2 b1] of stage s.
// The words feed adc_digital_correction, which realigns and adds them.
// From the paper: 12 stages of 1.5 bit, +-500 mV input range, staged delivery
// of the words compensated by shift registers in the digital block.
// Own choices: two stages per clock, ideal sampling at the clock edge.
// CMP_OFFSET (default 0, ideal) shifts the comparator thresholds of every
// stage, by +CMP_OFFSET on even stages and -CMP_OFFSET on odd ones, to show
// that the 1.5-bit redundancy absorbs offsets up to +-Vref/4.
module pipeline_adc_model
  import fatalic_pkg::*;
#(
  parameter int unsigned N_ST = N_STAGES,
  parameter real         VREF = 0.5,
  parameter real         CMP_OFFSET = 0.0
) (
  input  logic        clk,
  input  logic        en,
  input  real         v_in,
  output stage_word_t stage_words [N_ST]
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned MAX_SKEW = stage_skew(N_ST - 1);

  real         v_hold;
  stage_word_t word_now [N_ST];

  initial v_hold = 0.0;

  always @(posedge clk) begin
    if (en) v_hold <= v_in;
  end

  for (genvar s = 0; s < N_ST; s++) begin : g_stage
    real v_stage_in, v_stage_res;
    if (s == 0) begin : g_first
      assign v_stage_in = v_hold;
    end else begin : g_next
      assign v_stage_in = g_stage[s-1].v_stage_res;
    end

    adc_stage_model #(.VREF(VREF), .OFFSET((s % 2 == 0) ? CMP_OFFSET : -CMP_OFFSET)) u_stage (
      .v_in  (v_stage_in),
      .word  (word_now[s]),
      .v_res (v_stage_res)
    );

    // One output latch plus the stage's position in the pipeline.
    localparam int unsigned D = 1 + stage_skew(s);
    stage_word_t sr [D];
    initial for (int k = 0; k < D; k++) sr[k] = STAGE_MID;
    always @(posedge clk) begin
      if (en) begin
        sr[0] <= word_now[s];
        for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
      end
    end
    assign stage_words[s] = sr[D-1];
  end

  // The last residue is not used by any stage.
  real unused_residue;
  assign unused_residue = g_stage[N_ST-1].v_stage_res;

  if (MAX_SKEW + 1 + 2 != ADC_LATENCY && N_ST == N_STAGES) begin : g_bad_latency
    $error("pipeline_adc_model: skew does not give the specified latency");
  end

endmodule
