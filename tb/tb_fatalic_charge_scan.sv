// tb_fatalic_charge_scan: charge-linearity scan of the full chip model over
// the whole fast-channel dynamic range, 25 fC to 1.2 nC, at the default
// parameters.
//
// The chip receives PMT pulses of the specified shape (4 ns rise, 36 ns fall,
// negative) starting on a rising clock edge, 30 clocks apart. The testbench
// plays the back end: for each pulse it takes the peak sample (the 2nd one
// after the pulse start) from the pins, i.e. the medium-gain word of the high
// phase and the alternative word and flag of the low phase, and reconstructs
// the charge from the most sensitive unsaturated gain: high gain if the flag
// says high gain and the code is below 4095, else medium gain if below 4095,
// else low gain (flag must then say low gain).
// Pedestals of all three gains are read first, the low-gain one with the
// force-low-gain bit set. The conversion factors (counts/pC) are calibrated
// on one pulse per gain (1 pC high, 10 pC medium, 400 pC low); the other
// pulses must then reconstruct to within 1% + 1.5 counts of the injected
// charge. This is a linearity check of the model over 18 bits of range. Each
// of the three gains must be used for at least one pulse.
// The charge list and the tolerance are this testbench's choices.
module tb_fatalic_charge_scan;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam real I_PED_FAST = -45.0e-6;
  localparam real I_PED_SLOW = -0.45e-6;
  localparam int  NQ = 20;

  logic clk = 1'b0, rst_n = 1'b0, force_lg = 1'b0;
  real  i_pmt = 0.0;
  logic [ADC_BITS-1:0] dout;
  alt_gain_e gain_flag;
  logic slow_sdata;
  int checks = 0, failures = 0;
  int n_used [3] = '{0, 0, 0};    // 0 high, 1 medium, 2 low gain

  fatalic dut (.clk, .rst_n, .force_lg, .i_pmt,
               .i_ped_hg(I_PED_FAST), .i_ped_mg(I_PED_FAST), .i_ped_lg(I_PED_FAST),
               .i_ped_slow(I_PED_SLOW), .dout, .gain_flag, .slow_sdata);

  always #12.5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
  endtask

  // ---------------------------------------------------------------- capture
  localparam int NE = 2000;
  int mg_at  [NE];
  int alt_at [NE];
  alt_gain_e flag_at [NE];

  function automatic int edge_idx();
    return int'($floor(($realtime - 12.5) / 25.0 + 0.01));
  endfunction

  // The sample of rising edge e is on the pins in the phases after edge e + 9.
  always @(posedge clk) begin
    int k, e;
    k = edge_idx();
    #6;
    e = k - 9;
    if (e >= 0 && e < NE) mg_at[e] = int'(dout);
    @(negedge clk);
    #6;
    if (e >= 0 && e < NE) begin
      alt_at[e]  = int'(dout);
      flag_at[e] = gain_flag;
    end
  end

  task automatic pmt_pulse(real q_pc);
    real ipk;
    ipk = -q_pc * 1.0e-12 / 20.0e-9;
    for (int k = 0; k < 80; k++) begin
      real t;
      t = k * 0.5;
      if (t < 4.0) i_pmt = ipk * t / 4.0;
      else         i_pmt = ipk * (40.0 - t) / 36.0;
      #0.5;
    end
    i_pmt = 0.0;
  endtask

  initial begin
    #(25.0 * 1500);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real q_list [NQ] = '{1.0, 10.0, 400.0,
                       0.025, 0.05, 0.1, 0.25, 0.5, 2.0, 5.0, 15.0, 30.0,
                       60.0, 120.0, 200.0, 300.0, 500.0, 800.0, 1000.0, 1200.0};
  int p_edge [NQ];

  initial begin
    int ped [3];
    real gain [3];
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (60) @(posedge clk);

    // Pedestals: high and medium gain normally, low gain with force_lg.
    begin
      int e;
      e = edge_idx() - 15;
      ped[0] = alt_at[e];
      ped[1] = mg_at[e];
      checks++;
      if (flag_at[e] != ALT_HIGH_GAIN) fail("pedestal not read in high gain");
      @(negedge clk) force_lg = 1'b1;
      repeat (20) @(posedge clk);
      e = edge_idx() - 12;
      ped[2] = alt_at[e];
      checks++;
      if (flag_at[e] != ALT_LOW_GAIN) fail("forced pedestal not read in low gain");
      @(negedge clk) force_lg = 1'b0;
      repeat (20) @(posedge clk);
      $display("pedestals HG %0d MG %0d LG %0d", ped[0], ped[1], ped[2]);
    end

    for (int p = 0; p < NQ; p++) begin
      @(posedge clk);
      p_edge[p] = edge_idx();
      pmt_pulse(q_list[p]);
      repeat (29) @(posedge clk);
    end
    repeat (20) @(posedge clk);

    // Calibration pulses 0..2, one per gain.
    gain[0] = real'(alt_at[p_edge[0] + 1] - ped[0]) / q_list[0];
    gain[1] = real'(mg_at[p_edge[1] + 1] - ped[1]) / q_list[1];
    gain[2] = real'(alt_at[p_edge[2] + 1] - ped[2]) / q_list[2];
    checks += 3;
    if (flag_at[p_edge[0] + 1] != ALT_HIGH_GAIN) fail("1 pC calibration pulse not in high gain");
    if (flag_at[p_edge[2] + 1] != ALT_LOW_GAIN)  fail("400 pC calibration pulse not in low gain");
    if (gain[0] / gain[1] < 7.8 || gain[0] / gain[1] > 8.2 ||
        gain[1] / gain[2] < 7.8 || gain[1] / gain[2] > 8.2)
      fail($sformatf("gain ratios %0.2f %0.2f, expected 8", gain[0] / gain[1], gain[1] / gain[2]));
    $display("counts per pC: HG %0.2f MG %0.3f LG %0.4f", gain[0], gain[1], gain[2]);

    for (int p = 3; p < NQ; p++) begin
      int e, g, c;
      real q_rec, tol;
      e = p_edge[p] + 1;
      if (flag_at[e] == ALT_HIGH_GAIN && alt_at[e] < 4095) begin g = 0; c = alt_at[e]; end
      else if (mg_at[e] < 4095)                            begin g = 1; c = mg_at[e]; end
      else                                                 begin g = 2; c = alt_at[e]; end
      checks++;
      if (g == 2 && flag_at[e] != ALT_LOW_GAIN) begin
        fail($sformatf("%0.3f pC: high and medium gain saturated but low gain not sent", q_list[p]));
        continue;
      end
      n_used[g]++;
      q_rec = real'(c - ped[g]) / gain[g];
      tol = 0.01 * q_list[p] + 1.5 / gain[g];
      checks++;
      if (q_rec < q_list[p] - tol || q_rec > q_list[p] + tol)
        fail($sformatf("%0.3f pC reconstructed as %0.4f pC from gain %0d code %0d",
                       q_list[p], q_rec, g, c));
      $display("Q %8.3f pC  gain %0d  code %4d  reconstructed %9.4f pC", q_list[p], g, c, q_rec);
    end

    checks += 3;
    if (n_used[0] == 0) fail("high gain never used");
    if (n_used[1] == 0) fail("medium gain never used");
    if (n_used[2] == 0) fail("low gain never used");
    $display("pulses reconstructed from HG %0d, MG %0d, LG %0d", n_used[0], n_used[1], n_used[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
