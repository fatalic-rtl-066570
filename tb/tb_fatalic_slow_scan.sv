// tb_fatalic_slow_scan: current scan of the slow (integrator) channel of the
// full chip model over its dynamic range, 0.5 nA to 1 uA of average anode
// current, as seen during a caesium-source calibration scan.
//
// A DC anode current (negative polarity) is applied in steps of 0, 0.5 nA,
// 10 nA, 50 nA, 100 nA, 500 nA and 1 uA. After each step the testbench waits
// 1.2 ms (12 time constants of the 100 us integrator) and then decodes the
// serial frames of the slow pin (12 bits, MSB first, 4 clocks per bit, one
// frame per 48 clocks starting at reset release) and averages 16 of them, as
// the readout board does over a longer window. Checks:
//  * each averaged code equals the ideal conversion of the expected
//    integrator voltage 2*R*(I_ped - 0.875*I) within 1.5 counts (the 87.5 %
//    share of the current conveyor, R = 500 kOhm);
//  * the 0.5 nA step moves the code by 1 to 3 counts (the chip's smallest
//    specified current is resolved);
//  * the slope between 100 nA and 1 uA is within 1% of 0.875*2*R*4096 counts/A;
//  * frames arrive every 48 clocks (counted, at least one per step).
// The step list and tolerances are this testbench's choices.
module tb_fatalic_slow_scan;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam real R_SLOW     = 500.0e3;
  localparam real WSUM       = 585.0 / 64.0;
  localparam real I_PED_FAST = -45.0e-6;
  localparam real I_PED_SLOW = -0.45e-6;
  localparam int  NSTEP      = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  real  i_pmt = 0.0;
  logic [ADC_BITS-1:0] dout;
  alt_gain_e gain_flag;
  logic slow_sdata;
  int checks = 0, failures = 0, n_frames = 0;
  int last_frame_edge = -1, bad_period = 0;
  int frame_q [$];

  fatalic dut (.clk, .rst_n, .force_lg(1'b0), .i_pmt,
               .i_ped_hg(I_PED_FAST), .i_ped_mg(I_PED_FAST), .i_ped_lg(I_PED_FAST),
               .i_ped_slow(I_PED_SLOW), .dout, .gain_flag, .slow_sdata);

  always #12.5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
  endtask

  function automatic int ideal_code(real v);
    int c;
    c = int'($floor((v + 0.5) * 4096.0));
    if (c < 0) c = 0;
    if (c > 4095) c = 4095;
    return c;
  endfunction

  // Frame receiver: frames start at reset release and then every 48 clocks;
  // bits are sampled in the middle of their 4-clock slot.
  initial begin
    logic [ADC_BITS-1:0] rx;
    int edge_cnt;
    @(posedge rst_n);
    edge_cnt = 0;
    forever begin
      rx = '0;
      for (int c = 0; c < SLOW_DIV; c++) begin
        @(negedge clk);
        if (c % SLOW_BIT_CLKS == 1 && c / SLOW_BIT_CLKS < ADC_BITS)
          rx = {rx[ADC_BITS-2:0], slow_sdata};
        edge_cnt++;
      end
      if (last_frame_edge >= 0 && edge_cnt - last_frame_edge != SLOW_DIV) bad_period++;
      last_frame_edge = edge_cnt;
      n_frames++;
      frame_q.push_back(int'(rx));
    end
  end

  initial begin
    #(25.0 * 400000);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real i_list [NSTEP] = '{0.0, 0.5e-9, 10.0e-9, 50.0e-9, 100.0e-9, 500.0e-9, 1.0e-6};
  real avg [NSTEP];

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int s = 0; s < NSTEP; s++) begin
      int n0;
      real v_exp, sum;
      i_pmt = -i_list[s];
      #1200000;
      n0 = n_frames;
      frame_q.delete();
      wait (frame_q.size() >= 16);
      sum = 0.0;
      for (int k = 0; k < 16; k++) sum += real'(frame_q[k]);
      avg[s] = sum / 16.0;
      v_exp = 2.0 * R_SLOW * (I_PED_SLOW + i_list[s] * 8.0 / WSUM);
      checks++;
      if (avg[s] < real'(ideal_code(v_exp)) - 1.5 || avg[s] > real'(ideal_code(v_exp)) + 1.5)
        fail($sformatf("I = %0.1f nA: slow code %0.2f, ideal %0d", i_list[s] * 1e9, avg[s], ideal_code(v_exp)));
      $display("I = %7.1f nA  slow code %7.2f  ideal %4d", i_list[s] * 1e9, avg[s], ideal_code(v_exp));
      checks++;
      if (n_frames == n0) fail("no slow frame during a step");
    end

    checks++;
    if (avg[1] - avg[0] < 1.0 || avg[1] - avg[0] > 3.0)
      fail($sformatf("0.5 nA step moved the code by %0.2f counts", avg[1] - avg[0]));
    begin
      real slope, slope_exp;
      slope = (avg[6] - avg[4]) / (i_list[6] - i_list[4]);
      slope_exp = 8.0 / WSUM * 2.0 * R_SLOW * 4096.0;
      checks++;
      if (slope < 0.99 * slope_exp || slope > 1.01 * slope_exp)
        fail($sformatf("slope %0.4g counts/A, expected %0.4g", slope, slope_exp));
      $display("slope %0.4f nA/count", 1.0e9 / slope);
    end
    checks++;
    if (bad_period != 0) fail($sformatf("%0d frames not 48 clocks apart", bad_period));
    $display("slow frames received %0d", n_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
