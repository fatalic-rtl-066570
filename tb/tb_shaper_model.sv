// tb_shaper_model: self-checking testbench of the shaper model.
//
// Fast shaper (5 kOhm, 5 pF): (1) a 10 uA current step must follow
// 2*R*I*(1 - exp(-t/25 ns)), checked at 25, 50 and 100 ns (within 0.5%) and
// every nanosecond up to 300 ns (within 1.5% of full step, the step time
// is only known to the model's 0.5 ns update grid); a -10 uA step must give
// the mirror image (linearity in sign); (2) a PMT-like triangular pulse
// (4 ns rise, 36 ns fall) must peak between 20 and 30 ns after its start
// (the design's 25 ns peaking time), follow a reference response computed
// here by fine-step integration (0.01 ns) every nanosecond within 0.5% of the
// peak, and return to below 1% of the peak after 200 ns.
// Slow shaper (500 kOhm, 200 pF): a 100 nA step must follow
// 2*R*I*(1 - exp(-t/100 us)), checked every 10 us up to 1 ms (within 1% of
// full step); its final value is 2*R*I within 0.1%.
module tb_shaper_model;
  timeunit 1ns;
  timeprecision 1ps;

  real i_fast = 0.0, v_fast, i_slow = 0.0, v_slow;
  int checks = 0, failures = 0;

  shaper_model #(.R_OHM(5.0e3), .C_F(5.0e-12), .DT_NS(0.5)) u_fast (.i_in(i_fast), .v_out(v_fast));
  shaper_model #(.R_OHM(500.0e3), .C_F(200.0e-12), .DT_NS(5.0)) u_slow (.i_in(i_slow), .v_out(v_slow));

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic check_rel(real got, real expv, real tol, string what);
    checks++;
    if (got < expv * (1.0 - tol) || got > expv * (1.0 + tol)) begin
      failures++;
      $display("%s: got %g expected %g", what, got, expv);
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vpk, tpk, t0;
    // --- fast step response
    #0.25 i_fast = 10.0e-6;
    #25  check_rel(v_fast, 2.0 * 5.0e3 * 10.0e-6 * (1.0 - $exp(-1.0)), 0.005, "fast step 25ns");
    #25  check_rel(v_fast, 2.0 * 5.0e3 * 10.0e-6 * (1.0 - $exp(-2.0)), 0.005, "fast step 50ns");
    #50  check_rel(v_fast, 2.0 * 5.0e3 * 10.0e-6 * (1.0 - $exp(-4.0)), 0.005, "fast step 100ns");
    #200;
    check_rel(v_fast, 2.0 * 5.0e3 * 10.0e-6, 0.001, "fast step final value");
    i_fast = 0.0;
    #500;
    // --- fast step response, every ns, both signs
    for (int sg = 0; sg < 2; sg++) begin
      real amp;
      amp = (sg == 0 ? 1.0 : -1.0) * 2.0 * 5.0e3 * 10.0e-6;
      i_fast = (sg == 0 ? 1.0 : -1.0) * 10.0e-6;
      for (int k = 1; k <= 300; k++) begin
        #1;
        checks++;
        if (fabs(v_fast - amp * (1.0 - $exp(-real'(k) / 25.0))) > 0.015 * fabs(amp)) begin
          failures++;
          if (failures < 10) $display("step %0d at %0d ns: %g", sg, k, v_fast);
        end
      end
      i_fast = 0.0;
      #1000;
    end
    // --- PMT-like pulse: 4 ns linear rise to 1 mA, 36 ns linear fall
    begin
      // reference: tau dV/dt = 2RI - V integrated in 0.01 ns steps, with the
      // input held in 0.5 ns steps as it is applied to the model
      real vref [401];
      real vr;
      vr = 0.0;
      vref[0] = 0.0;
      for (int k = 0; k < 400; k++) begin
        real t, ii;
        t = k * 0.5;
        if (t < 4.0)       ii = 1.0e-3 * t / 4.0;
        else if (t < 40.0) ii = 1.0e-3 * (40.0 - t) / 36.0;
        else               ii = 0.0;
        for (int j = 0; j < 50; j++) vr = vr + 0.01 / 25.0 * (2.0 * 5.0e3 * ii - vr);
        vref[k + 1] = vr;
      end
      vpk = 0.0; tpk = 0.0; t0 = $realtime;
      for (int k = 0; k < 400; k++) begin   // 0.5 ns steps over 200 ns
        real t;
        t = k * 0.5;
        if (t < 4.0)       i_fast = 1.0e-3 * t / 4.0;
        else if (t < 40.0) i_fast = 1.0e-3 * (40.0 - t) / 36.0;
        else               i_fast = 0.0;
        #0.5;
        if (v_fast > vpk) begin vpk = v_fast; tpk = $realtime - t0; end
        if ((k + 1) % 2 == 0) begin
          checks++;
          if (fabs(v_fast - vref[k + 1]) > 0.005 * vref[50]) begin
            failures++;
            if (failures < 10) $display("pulse at %g ns: %g, reference %g", t + 0.5, v_fast, vref[k + 1]);
          end
        end
      end
      $display("pulse peak %g V at %g ns (reference peak near %g V)", vpk, tpk, vref[50]);
    end
    checks++;
    if (tpk < 20.0 || tpk > 30.0) begin
      failures++;
      $display("pulse peaks at %g ns", tpk);
    end
    checks++;
    if (v_fast > 0.01 * vpk) begin
      failures++;
      $display("pulse tail %g of peak %g", v_fast, vpk);
    end
    // --- slow step response over one time constant
    i_slow = 100.0e-9;
    #100000;
    check_rel(v_slow, 2.0 * 500.0e3 * 100.0e-9 * (1.0 - $exp(-1.0)), 0.01, "slow step 100us");
    for (int k = 11; k <= 100; k++) begin
      #10000;
      checks++;
      if (fabs(v_slow - 0.1 * (1.0 - $exp(-real'(k) / 10.0))) > 0.001) begin
        failures++;
        if (failures < 10) $display("slow step at %0d us: %g", k * 10, v_slow);
      end
    end
    check_rel(v_slow, 2.0 * 500.0e3 * 100.0e-9, 0.001, "slow step final value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
