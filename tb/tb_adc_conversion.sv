// tb_adc_conversion: self-checking testbench of a complete 12-bit ADC, the
// pipelined converter model followed by its digital correction, with ideal
// and with offset comparators.
//
// Three converters run side by side on the same input: one with ideal
// comparators, one whose thresholds are shifted by +-100 mV (alternating
// sign from stage to stage) and one by -+100 mV. A random differential
// voltage in +-500 mV is applied on every 40 MHz clock, plus the corner
// values 0 V and +-499.9 mV. The code of the sample taken on rising edge k
// is read after edge k + 8 (the 8-clock conversion latency) and compared with
// the ideal transfer function floor((V + 0.5 V) * 4096), clipped to 0..4095,
// within one count. The offset converters must give the same accuracy: a
// threshold error below Vref/4 = 125 mV only moves a decision between two
// overlapping ranges, and the next stages absorb it. Counts how many samples
// in the offset runs took a stage decision different from the ideal
// converter (the redundancy at work); at least one must occur.
// A second phase repeats the chip's ADC ramp test: a slow ramp over the
// whole input range (8 samples per LSB) is converted at 40 MHz; for each
// converter the largest deviation from the ideal transfer function (INL) and
// the code widths (DNL) are measured. INL must stay within 1 LSB, and the
// ideal converter must show every inner code 1..4094 with a width of 8 +- 1
// samples (the two end codes are open-ended, as in any DNL measurement).
// The offset value and the tolerances are this testbench's choices.
module tb_adc_conversion;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NS    = N_STAGES;
  localparam int NSAMP = 3000;
  localparam real OFS  = 0.100;
  localparam int NRAMP = 4096 * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  real  v_in = 0.0;
  stage_word_t w_id [NS], w_p [NS], w_m [NS];
  logic [ADC_BITS-1:0] c_id, c_p, c_m;
  int checks = 0, failures = 0, n_redundant = 0;

  pipeline_adc_model u_adc_id (.clk, .en(1'b1), .v_in, .stage_words(w_id));
  pipeline_adc_model #(.CMP_OFFSET(OFS))  u_adc_p (.clk, .en(1'b1), .v_in, .stage_words(w_p));
  pipeline_adc_model #(.CMP_OFFSET(-OFS)) u_adc_m (.clk, .en(1'b1), .v_in, .stage_words(w_m));

  adc_digital_correction u_cor_id (.clk, .rst_n, .en(1'b1), .stage_words(w_id), .code(c_id));
  adc_digital_correction u_cor_p  (.clk, .rst_n, .en(1'b1), .stage_words(w_p),  .code(c_p));
  adc_digital_correction u_cor_m  (.clk, .rst_n, .en(1'b1), .stage_words(w_m),  .code(c_m));

  always #12.5 clk = ~clk;

  function automatic int ideal_code(real v);
    int c;
    c = int'($floor((v + 0.5) * 4096.0));
    if (c < 0) c = 0;
    if (c > 4095) c = 4095;
    return c;
  endfunction

  task automatic check_code(string name, int got, int exp, int k);
    checks++;
    if (got < exp - 1 || got > exp + 1) begin
      failures++;
      if (failures < 10) $display("FAIL sample %0d %s: code %0d, ideal %0d", k, name, got, exp);
    end
  endtask

  initial begin
    #(25.0 * (NSAMP + NRAMP + 400));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real v_tab [NSAMP];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < NSAMP + ADC_LATENCY; k++) begin
      // drive the sample for edge k, then check the code of sample k - 8
      @(negedge clk);
      if (k < NSAMP) begin
        if (k == 0)      v_tab[k] = 0.0;
        else if (k == 1) v_tab[k] = 0.4999;
        else if (k == 2) v_tab[k] = -0.4999;
        else v_tab[k] = (real'($urandom_range(1000000)) / 1000000.0 - 0.5) * 0.9998;
        v_in = v_tab[k];
      end
      @(posedge clk);
      #1;
      if (k >= ADC_LATENCY) begin
        int j, e;
        j = k - ADC_LATENCY;
        e = ideal_code(v_tab[j]);
        check_code("ideal comparators", int'(c_id), e, j);
        check_code("+offset comparators", int'(c_p), e, j);
        check_code("-offset comparators", int'(c_m), e, j);
      end
      // stage-0 decisions differ whenever the input lies between the ideal
      // and the shifted threshold
      if (k >= 1 && k <= NSAMP && (w_p[0] != w_id[0] || w_m[0] != w_id[0])) n_redundant++;
    end
    // ---- ramp: INL and DNL
    begin
      int hist [3][4096];
      int inl_max [3];
      int dnl_bad;
      for (int c = 0; c < 3; c++) begin
        inl_max[c] = 0;
        for (int i = 0; i < 4096; i++) hist[c][i] = 0;
      end
      for (int k = 0; k < NRAMP + ADC_LATENCY; k++) begin
        @(negedge clk);
        if (k < NRAMP) v_in = -0.5 + (real'(k) + 0.5) / real'(NRAMP);
        @(posedge clk);
        #1;
        if (k >= ADC_LATENCY) begin
          int e, got [3];
          e = ideal_code(-0.5 + (real'(k - ADC_LATENCY) + 0.5) / real'(NRAMP));
          got[0] = int'(c_id); got[1] = int'(c_p); got[2] = int'(c_m);
          for (int c = 0; c < 3; c++) begin
            int d;
            d = got[c] - e;
            if (d < 0) d = -d;
            if (d > inl_max[c]) inl_max[c] = d;
            hist[c][got[c]]++;
          end
        end
      end
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (inl_max[c] > 1) begin
          failures++;
          $display("FAIL converter %0d: INL %0d LSB", c, inl_max[c]);
        end
      end
      dnl_bad = 0;
      for (int i = 1; i < 4095; i++) begin
        checks++;
        if (hist[0][i] < 7 || hist[0][i] > 9) begin
          failures++;
          dnl_bad++;
          if (dnl_bad < 5) $display("FAIL ideal converter: code %0d width %0d samples", i, hist[0][i]);
        end
      end
      $display("ramp: max INL ideal %0d, +offset %0d, -offset %0d LSB", inl_max[0], inl_max[1], inl_max[2]);
    end

    checks++;
    if (n_redundant == 0) begin
      failures++;
      $display("FAIL: the offset converters never took a different decision");
    end
    $display("samples with a different stage-0 decision under offset: %0d", n_redundant);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
