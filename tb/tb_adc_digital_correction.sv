// tb_adc_digital_correction: self-checking testbench of the pipelined-ADC
// digital correction.
//
// Random and corner-case input voltages are converted by an integer model of
// the 1.5-bit stages written here (voltages in units of Vref/65536). The
// stage words are presented with the skew of a real pipeline (stage s lags
// stage 0 by s/2 conversion clocks). Each output code is compared with
// (a) the overlapped sum of the words computed here, shifted right by one,
// and (b) the ideal 12-bit transfer function (tolerance 1 LSB). The latency
// (7 enabled clocks from the clock that captures the stage-0 word) is checked
// by that comparison; a second phase enables conversions on random clocks
// and checks that the code holds between enabled clocks.
module tb_adc_digital_correction;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NS     = N_STAGES;
  localparam int VR     = 65536;         // Vref in model units
  localparam int NSAMP  = 3000;
  localparam int LAT    = stage_skew(NS - 1) + 1;  // capture edge index of the code

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  stage_word_t words [NS];
  logic [ADC_BITS-1:0] code;

  int checks = 0, failures = 0;

  adc_digital_correction dut (.clk, .rst_n, .en, .stage_words(words), .code);

  always #12.5 clk = ~clk;

  // Per-sample stage words, expected code and ideal code.
  logic [1:0] w_tab [NSAMP][NS];
  int         exp_code [NSAMP];
  int         ideal_code [NSAMP];

  task automatic convert(input int v0, input int idx);
    longint v = v0;
    longint d = 0;
    for (int s = 0; s < NS; s++) begin
      int dig;
      if (v > VR / 4)       begin dig = 2; v = 2 * v - VR; end
      else if (v < -VR / 4) begin dig = 0; v = 2 * v + VR; end
      else                  begin dig = 1; v = 2 * v;      end
      w_tab[idx][s] = dig[1:0];
      d += longint'(dig) << (NS - 1 - s);
    end
    exp_code[idx] = int'(d >> 1);
    ideal_code[idx] = (v0 + VR) >>> 5;   // 2*VR range over 4096 codes
    if (ideal_code[idx] > 4095) ideal_code[idx] = 4095;
  endtask

  int ke;          // number of enabled edges so far = index of sample at stage 0
  logic [ADC_BITS-1:0] prev_code;

  // Drive the words of the current sample index with pipeline skew.
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      int k;
      k = ke - stage_skew(s);
      words[s] = (k >= 0 && k < NSAMP) ? w_tab[k][s] : STAGE_MID;
    end
  end

  initial begin
    #(25 * 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int corner [8] = '{-VR + 1, VR - 1, 0, VR / 4, -VR / 4, VR / 4 + 1, -VR / 4 - 1, 12345};
    for (int i = 0; i < NSAMP; i++) begin
      int v;
      if (i < 8) v = corner[i];
      else v = int'($urandom_range(2 * VR - 2)) - VR + 1;
      convert(v, i);
    end
    ke = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 2 * NSAMP + 50; t++) begin
      @(negedge clk);
      en = (t < NSAMP / 2) ? 1'b1 : 1'($urandom_range(1));
      prev_code = code;
      @(posedge clk);
      #1;
      if (en) begin
        // code just updated holds sample ke - LAT
        if (ke - LAT >= 0 && ke - LAT < NSAMP) begin
          int k;
          k = ke - LAT;
          checks++;
          if (int'(code) != exp_code[k]) begin
            failures++;
            if (failures < 10) $display("sample %0d: code %0d expected %0d", k, code, exp_code[k]);
          end
          checks++;
          if (int'(code) > ideal_code[k] + 1 || int'(code) < ideal_code[k] - 1) begin
            failures++;
            if (failures < 10) $display("sample %0d: code %0d ideal %0d", k, code, ideal_code[k]);
          end
        end
        ke++;
      end else begin
        checks++;
        if (code != prev_code) begin
          failures++;
          if (failures < 10) $display("code changed without enable");
        end
      end
      if (ke >= NSAMP + LAT + 1) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
