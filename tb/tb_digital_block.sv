// tb_digital_block: self-checking testbench of the complete digital block.
//
// The four ADCs are replaced by integer models of the 1.5-bit pipeline that
// present stage words exactly as the converter does: the words of a sample
// taken on enabled edge n show up after edge n+1 (stage 0) to n+6 (stages 10
// and 11). The fast channels get a new random voltage every clock, the
// low-gain voltage spread around the 600-count switching point; the slow
// channel gets a new one on each conversion strobe.
// Checked, against codes computed here from the stage words:
//  * dout during the high phase after edge n+9 = medium-gain code of the
//    sample taken on edge n (8-clock conversion latency + output register);
//  * dout during the following low phase = low-gain code if it is >= 600 or
//    force_lg is set, else high-gain code; gain_flag says which;
//  * serial frame j (48 clocks, MSB first, 4 clocks per bit) = slow code of
//    the sample taken on strobe j-9.
// Counts how often the alternative output carried high gain, low gain by
// threshold and low gain by force; each must happen.
module tb_digital_block;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NS = N_STAGES;
  localparam int VR = 65536;
  localparam int NF = 1200;     // fast samples
  localparam int NSL = 30;      // slow samples

  logic clk = 1'b0, rst_n = 1'b0, force_lg = 1'b0;
  stage_word_t hg_w [NS], mg_w [NS], lg_w [NS], sl_w [NS];
  logic [ADC_BITS-1:0] dout;
  alt_gain_e gain_flag;
  logic slow_sdata, slow_conv_en;
  int checks = 0, failures = 0;
  int n_alt_hg = 0, n_alt_lg = 0, n_forced = 0, n_frames = 0;

  digital_block dut (.clk, .rst_n, .force_lg, .hg_words(hg_w), .mg_words(mg_w), .lg_words(lg_w),
                     .slow_words(sl_w), .dout, .gain_flag, .slow_sdata, .slow_conv_en);

  always #12.5 clk = ~clk;

  // channel 0..2 = HG, MG, LG; 3 = slow
  logic [1:0] wt [4][NF][NS];
  int         ct [4][NF];
  logic       frc [NF];

  task automatic convert(input int ch, input int v0, input int idx);
    longint v = v0;
    longint d = 0;
    for (int s = 0; s < NS; s++) begin
      int dig;
      if (v > VR / 4)       begin dig = 2; v = 2 * v - VR; end
      else if (v < -VR / 4) begin dig = 0; v = 2 * v + VR; end
      else                  begin dig = 1; v = 2 * v;      end
      wt[ch][idx][s] = dig[1:0];
      d += longint'(dig) << (NS - 1 - s);
    end
    ct[ch][idx] = int'(d >> 1);
  endtask

  function automatic int volt_for_code(int c);
    return c * 32 - VR + 16;   // centre of code c in model units
  endfunction

  int nf = 0;   // fast samples taken (enabled edges since reset)
  int ns = 0;   // slow samples taken

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      int k, m;
      k = nf - 2 - stage_skew(s);
      m = ns - 2 - stage_skew(s);
      hg_w[s] = (k >= 0) ? wt[0][k][s] : STAGE_MID;
      mg_w[s] = (k >= 0) ? wt[1][k][s] : STAGE_MID;
      lg_w[s] = (k >= 0) ? wt[2][k][s] : STAGE_MID;
      sl_w[s] = (m >= 0 && m < NSL) ? wt[3][m][s] : STAGE_MID;
    end
  end

  initial begin
    #(25 * 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus: all conversions prepared up front.
  initial begin
    for (int i = 0; i < NF; i++) begin
      convert(0, int'($urandom_range(2 * VR - 2)) - VR + 1, i);
      convert(1, int'($urandom_range(2 * VR - 2)) - VR + 1, i);
      convert(2, volt_for_code(560 + int'($urandom_range(80))), i);
      frc[i] = ($urandom_range(9) == 0);
    end
    for (int i = 0; i < NSL; i++) convert(3, int'($urandom_range(2 * VR - 2)) - VR + 1, i);
  end

  // Sample counters advance on the edges that take samples.
  always @(posedge clk) begin
    if (rst_n) begin
      nf <= nf + 1;
      if (slow_conv_en) ns <= ns + 1;
    end
  end

  // force_lg follows the sample whose codes are being selected: the selector
  // sees the codes of sample n during the clock after edge n+8.
  always @(negedge clk) begin
    int k;
    k = nf - 1 - 8;
    force_lg <= (k >= 0 && k < NF) ? frc[k] : 1'b0;
  end

  // Fast output checks.
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < NF + 12; t++) begin
      int k;
      @(posedge clk);
      // after edge number nf (already incremented) the pins show sample nf-1-9
      #6;
      k = nf - 1 - 9;
      if (k >= 0 && k < NF) begin
        checks++;
        if (int'(dout) != ct[1][k]) begin
          failures++;
          if (failures < 10) $display("sample %0d: MG dout %0d expected %0d", k, dout, ct[1][k]);
        end
      end
      @(negedge clk);
      #6;
      if (k >= 0 && k < NF) begin
        bit lg;
        int exp_alt;
        lg = frc[k] || (ct[2][k] >= 600);
        exp_alt = lg ? ct[2][k] : ct[0][k];
        checks++;
        if (int'(dout) != exp_alt || gain_flag != (lg ? ALT_LOW_GAIN : ALT_HIGH_GAIN)) begin
          failures++;
          if (failures < 10) $display("sample %0d: ALT dout %0d flag %0d expected %0d lg=%0b", k, dout,
                                      gain_flag, exp_alt, lg);
        end
        if (!lg) n_alt_hg++;
        else if (ct[2][k] >= 600) n_alt_lg++;
        else n_forced++;
      end
    end
  end

  // Slow serial checks: frame j starts at the edge where the strobe rises.
  initial begin
    int j;
    logic [ADC_BITS-1:0] rx;
    // Frame 0 starts at reset release and is already under way when this
    // loop first looks, so counting starts at frame 1.
    j = 1;
    @(posedge rst_n);
    while (j < NSL + 9) begin
      // slow_conv_en is high during the first clock of every frame
      @(negedge clk);
      if (slow_conv_en) begin
        rx = '0;
        for (int c = 0; c < 48; c++) begin
          if (c % 4 == 2 && c / 4 < ADC_BITS) rx = {rx[ADC_BITS-2:0], slow_sdata};
          if (c < 47) @(negedge clk);
        end
        if (j >= 9) begin
          checks++;
          n_frames++;
          if (int'(rx) != ct[3][j - 9]) begin
            failures++;
            if (failures < 10) $display("slow frame %0d: %0d expected %0d", j, rx, ct[3][j - 9]);
          end
        end
        j++;
      end
    end
    checks += 4;
    if (n_alt_hg == 0) begin failures++; $display("alternative high gain never selected"); end
    if (n_alt_lg == 0) begin failures++; $display("low gain never selected by threshold"); end
    if (n_forced == 0) begin failures++; $display("low gain never forced"); end
    if (n_frames == 0) begin failures++; $display("no slow frame checked"); end
    $display("alt HG %0d, alt LG %0d, forced LG %0d, slow frames %0d", n_alt_hg, n_alt_lg, n_forced, n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
