// tb_fatalic: end-to-end testbench of the FATALIC chip model at its default
// parameters.
//
// A 40 MHz clock runs the chip. All three fast pedestals are set to -0.45 V
// at the shaper outputs (tuning current -45 uA), the slow one to -0.45 V
// (-0.45 uA). A DC anode current of -0.5 uA, as in a caesium-source scan,
// flows all the time. PMT pulses with the specified shape (4 ns rise, 36 ns
// fall, negative polarity) are injected at clock edges with charges from
// 0.5 pC to 1.2 nC, one with the force-low-gain bit set. The output pins are
// sampled in every high phase (medium gain) and low phase (alternative gain
// and flag); the slow serial frames are decoded.
// Checks:
//  * pedestal codes of medium and high gain equal the ideal conversion of the
//    expected shaper voltage (+-3 counts);
//  * each pulse's largest medium-gain sample is the second one after the
//    pulse start (the shaper peaks 25 ns after the pulse), which also checks
//    the 8-clock conversion latency plus the output register;
//  * high-gain/medium-gain amplitude ratio of an unsaturated pulse is 8 (+-5%)
//    and medium-gain amplitude is linear in charge (+-3%);
//  * the flag reports high gain while the low-gain code is below 600, low
//    gain at and above it, low gain always when forced;
//  * the slow channel integrates the pulse charge (its code reaches full
//    scale) and then settles to the ideal conversion of the DC level (+-4).
// Counts: alternative = high gain, = low gain by threshold, forced low gain,
// saturated high gain on the alternative output, slow frames; each must occur.
module tb_fatalic;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam real R_FAST = 5.0e3;
  localparam real R_SLOW = 500.0e3;
  localparam real WSUM   = 585.0 / 64.0;
  localparam real I_PED_FAST = -45.0e-6;
  localparam real I_PED_SLOW = -0.45e-6;
  localparam real I_DC       = -0.5e-6;

  logic clk = 1'b0, rst_n = 1'b0, force_lg = 1'b0;
  real  i_pmt, i_pulse = 0.0;
  logic [ADC_BITS-1:0] dout;
  alt_gain_e gain_flag;
  logic slow_sdata;
  int checks = 0, failures = 0;
  int n_alt_hg = 0, n_alt_lg = 0, n_forced = 0, n_hg_sat = 0, n_frames = 0;

  fatalic dut (.clk, .rst_n, .force_lg, .i_pmt,
               .i_ped_hg(I_PED_FAST), .i_ped_mg(I_PED_FAST), .i_ped_lg(I_PED_FAST),
               .i_ped_slow(I_PED_SLOW), .dout, .gain_flag, .slow_sdata);

  always #12.5 clk = ~clk;
  assign i_pmt = I_DC + i_pulse;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
  endtask

  // Ideal 12-bit conversion of a differential voltage in +-0.5 V.
  function automatic int ideal_code(real v);
    int c;
    c = int'($floor((v + 0.5) * 4096.0));
    if (c < 0) c = 0;
    if (c > 4095) c = 4095;
    return c;
  endfunction

  // ---------------------------------------------------------------- capture
  localparam int NE = 40000;
  int mg_at  [NE];                  // medium-gain code of the sample of edge e
  int alt_at [NE];
  alt_gain_e flag_at [NE];
  logic force_at [NE];              // force_lg around rising edge e

  // Index of the rising edge at (or just before) the current time; the first
  // rising edge is at 12.5 ns.
  function automatic int edge_idx();
    return int'($floor(($realtime - 12.5) / 25.0 + 0.01));
  endfunction

  // force_lg only changes at falling edges, so its value here is the one the
  // gain selector used at this rising edge.
  always @(posedge clk) begin
    int k, e;
    k = edge_idx();
    #6;
    e = k - 9;
    if (k < NE) force_at[k] = force_lg;
    if (e >= 0 && e < NE) mg_at[e] = int'(dout);
    @(negedge clk);
    #6;
    if (e >= 0 && e < NE) begin
      alt_at[e]  = int'(dout);
      flag_at[e] = gain_flag;
    end
  end

  // ---------------------------------------------------------------- pulses
  task automatic pmt_pulse(real q_pc);
    real ipk;
    ipk = -q_pc * 1.0e-12 / 20.0e-9;   // triangle 4 ns + 36 ns, area = Ipk * 20 ns
    for (int k = 0; k < 80; k++) begin
      real t;
      t = k * 0.5;
      if (t < 4.0) i_pulse = ipk * t / 4.0;
      else         i_pulse = ipk * (40.0 - t) / 36.0;
      #0.5;
    end
    i_pulse = 0.0;
  endtask

  // ---------------------------------------------------------------- slow frames
  int slow_last = -1;
  int slow_hist [$];
  initial begin
    logic [ADC_BITS-1:0] rx;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (dut.u_digital.slow_conv_en) begin
        rx = '0;
        for (int c = 0; c < 48; c++) begin
          if (c % 4 == 2 && c / 4 < ADC_BITS) rx = {rx[ADC_BITS-2:0], slow_sdata};
          if (c < 47) @(negedge clk);
        end
        n_frames++;
        slow_last = int'(rx);
        slow_hist.push_back(int'(rx));
      end
    end
  end

  initial begin
    #(25.0 * 64000);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- main
  real q_list [7] = '{0.5, 1.0, 2.0, 20.0, 150.0, 600.0, 1200.0};
  int  p_edge [8];
  int  ped_mg, ped_hg;

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (100) @(posedge clk);

    // Pedestals: expected shaper voltage from pedestal current and DC share.
    begin
      int e;
      real v_hg, v_mg;
      e = edge_idx() - 20;
      v_hg = 2.0 * R_FAST * (I_PED_FAST - I_DC * 1.0 / WSUM);
      v_mg = 2.0 * R_FAST * (I_PED_FAST - I_DC * 0.125 / WSUM);
      ped_mg = mg_at[e];
      ped_hg = alt_at[e];
      checks += 3;
      if (ped_mg < ideal_code(v_mg) - 3 || ped_mg > ideal_code(v_mg) + 3)
        fail($sformatf("MG pedestal %0d, ideal %0d", ped_mg, ideal_code(v_mg)));
      if (ped_hg < ideal_code(v_hg) - 3 || ped_hg > ideal_code(v_hg) + 3)
        fail($sformatf("HG pedestal %0d, ideal %0d", ped_hg, ideal_code(v_hg)));
      if (flag_at[e] != ALT_HIGH_GAIN) fail("pedestal not read in high gain");
    end

    // Pulses, 30 clocks apart; the last one repeats 20 pC with force_lg.
    for (int p = 0; p < 8; p++) begin
      @(negedge clk);
      force_lg = (p == 7);
      @(posedge clk);
      p_edge[p] = edge_idx();    // this edge samples t = 0 of the pulse
      pmt_pulse(p == 7 ? 20.0 : q_list[p]);
      repeat (28) @(posedge clk);
    end
    @(negedge clk);
    force_lg = 1'b0;
    repeat (20) @(posedge clk);

    // Per-pulse analysis.
    begin
      int amp_mg [8];
      int amp_hg [8];
      for (int p = 0; p < 8; p++) begin
        int e0, best, best_e;
        e0 = p_edge[p];
        best = -1; best_e = -1;
        for (int e = e0; e < e0 + 10; e++) if (mg_at[e] > best) begin best = mg_at[e]; best_e = e; end
        amp_mg[p] = best - ped_mg;
        amp_hg[p] = alt_at[e0 + 1] - ped_hg;
        checks++;
        if (best < 4095 && best_e != e0 + 1)
          fail($sformatf("pulse %0d: MG peak at sample %0d, expected 2nd sample", p, best_e - e0));
        for (int e = e0; e < e0 + 10; e++) begin
          checks++;
          if (force_at[e + 9]) begin
            // force_lg was applied while the codes of this sample were selected
            if (flag_at[e] != ALT_LOW_GAIN) fail($sformatf("pulse %0d: forced sample not low gain", p));
            n_forced++;
          end else if (flag_at[e] == ALT_LOW_GAIN) begin
            if (alt_at[e] < 600) fail($sformatf("pulse %0d: low gain sent with code %0d < 600", p, alt_at[e]));
            n_alt_lg++;
          end else begin
            // high gain sent: low gain must have been below 600; bound it by
            // the medium-gain code (LG amplitude = MG amplitude / 8)
            if (mg_at[e] < 4095 && ped_mg + (mg_at[e] - ped_mg) / 8 >= 600 + 8)
              fail($sformatf("pulse %0d: high gain sent though low gain must be >= 600", p));
            n_alt_hg++;
            if (alt_at[e] == 4095) n_hg_sat++;
          end
        end
      end
      // HG/MG gain ratio on the 2 pC pulse; MG linearity 20 pC vs 2 pC.
      checks += 2;
      if (real'(amp_hg[2]) / real'(amp_mg[2]) < 7.6 || real'(amp_hg[2]) / real'(amp_mg[2]) > 8.4)
        fail($sformatf("HG/MG ratio %0d/%0d", amp_hg[2], amp_mg[2]));
      if (real'(amp_mg[3]) / real'(amp_mg[2]) < 9.7 || real'(amp_mg[3]) / real'(amp_mg[2]) > 10.3)
        fail($sformatf("MG linearity %0d vs %0d", amp_mg[3], amp_mg[2]));
      $display("MG amplitude per pC %0.1f counts, HG %0.1f counts", amp_mg[3] / 20.0, amp_hg[2] / 2.0);
    end

    // Slow channel: the pulses (2 nC in all) drive the ideal integrator far
    // beyond full scale; wait 14 time constants for that to decay.
    #(1400000.0 - $realtime);
    begin
      real v_slow;
      v_slow = 2.0 * R_SLOW * (I_PED_SLOW - I_DC * 8.0 / WSUM);
      checks++;
      if (slow_last < ideal_code(v_slow) - 4 || slow_last > ideal_code(v_slow) + 4)
        fail($sformatf("slow code %0d, ideal %0d", slow_last, ideal_code(v_slow)));
      checks++;
      if (slow_hist.size() < 1000 || slow_hist.max() != '{4095})
        fail("slow channel did not integrate the pulse charge");
      $display("slow code %0d (ideal %0d), pedestals MG %0d HG %0d", slow_last, ideal_code(v_slow), ped_mg, ped_hg);
    end

    checks += 5;
    if (n_alt_hg == 0) fail("alternative output never high gain");
    if (n_alt_lg == 0) fail("low gain never selected by threshold");
    if (n_forced == 0) fail("low gain never forced");
    if (n_hg_sat == 0) fail("saturated high gain never seen");
    if (n_frames == 0) fail("no slow frame");
    $display("alt HG %0d (saturated %0d), alt LG %0d, forced %0d, slow frames %0d",
             n_alt_hg, n_hg_sat, n_alt_lg, n_forced, n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
