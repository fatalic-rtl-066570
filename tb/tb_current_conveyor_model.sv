// tb_current_conveyor_model: self-checking testbench of the current conveyor
// model. For random PMT currents (negative polarity, up to 60 mA peak) and
// pedestal currents it checks the split of the signal in proportion to the
// transistor widths 1 : 1/8 : 1/64 : 8 (gain ratios 8 and 64 between the
// fast channels, about 87.5% to the slow channel), that the bias current is
// fully removed (zero input gives the pedestal currents) and that the outputs
// add up to the input signal.
module tb_current_conveyor_model;
  timeunit 1ns;
  timeprecision 1ps;

  real i_pmt, d_hg, d_mg, d_lg, d_slow, i_hg, i_mg, i_lg, i_slow;
  int checks = 0, failures = 0;

  current_conveyor_model dut (.i_pmt, .i_dac_hg(d_hg), .i_dac_mg(d_mg), .i_dac_lg(d_lg),
                              .i_dac_slow(d_slow), .i_hg, .i_mg, .i_lg, .i_slow);

  function automatic bit close(real a, real b);
    real tol;
    tol = 1.0e-9 * ((b < 0 ? -b : b) + 1.0e-9);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%s: pmt=%g hg=%g mg=%g lg=%g slow=%g", what, i_pmt, i_hg, i_mg, i_lg, i_slow);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Width sum in units of Wfast: 1 + 1/8 + 1/64 + 8 = 585/64.
    real wsum;
    wsum = 585.0 / 64.0;
    for (int i = 0; i < 500; i++) begin
      i_pmt  = (i == 0) ? 0.0 : -60.0e-3 * $urandom_range(1000000) / 1.0e6;
      d_hg   = (i < 2) ? 0.0 : 1.0e-6 * ($urandom_range(200) - 100.0);
      d_mg   = (i < 2) ? 0.0 : 1.0e-6 * ($urandom_range(200) - 100.0);
      d_lg   = (i < 2) ? 0.0 : 1.0e-6 * ($urandom_range(200) - 100.0);
      d_slow = (i < 2) ? 0.0 : 1.0e-9 * ($urandom_range(200) - 100.0);
      #1;
      check(close(i_hg - d_hg, -i_pmt * 1.0 / wsum), "high gain share");
      check(close(i_mg - d_mg, -i_pmt * 0.125 / wsum), "medium gain share");
      check(close(i_lg - d_lg, -i_pmt * (1.0 / 64.0) / wsum), "low gain share");
      check(close(i_slow - d_slow, -i_pmt * 8.0 / wsum), "slow share");
      check(close((i_hg - d_hg) + (i_mg - d_mg) + (i_lg - d_lg) + (i_slow - d_slow), -i_pmt),
            "sum of shares");
      if (i_pmt < -1.0e-6) begin
        check((i_slow - d_slow) / -i_pmt > 0.87 && (i_slow - d_slow) / -i_pmt < 0.88, "slow ~87%");
        check(close((i_hg - d_hg) / (i_mg - d_mg), 8.0), "HG/MG = 8");
        check(close((i_hg - d_hg) / (i_lg - d_lg), 64.0), "HG/LG = 64");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
