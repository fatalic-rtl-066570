// tb_gain_selector: self-checking testbench of the dynamic gain switch.
//
// Drives random and boundary low-gain codes (599, 600, 601, 0, 4095) with
// random high-gain codes, with force_lg low and high, and checks the
// alternative code and the flag against the rule: low gain when forced or
// when the low-gain code is at least 600, high gain otherwise.
module tb_gain_selector;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic [ADC_BITS-1:0] hg_code, lg_code, alt_code;
  logic                force_lg;
  alt_gain_e           alt_gain;
  int checks = 0, failures = 0;
  int n_lg = 0, n_hg = 0;

  gain_selector dut (.hg_code, .lg_code, .force_lg, .alt_code, .alt_gain);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int corner [6] = '{599, 600, 601, 0, 4095, 1};
    for (int i = 0; i < 4000; i++) begin
      logic exp_lg;
      hg_code  = 12'($urandom);
      lg_code  = (i < 12) ? 12'(corner[i % 6]) : 12'($urandom_range(1200));
      force_lg = (i < 12) ? (i >= 6) : ($urandom_range(7) == 0);
      #1;
      exp_lg = force_lg || (lg_code >= 12'd600);
      checks++;
      if (alt_gain != (exp_lg ? ALT_LOW_GAIN : ALT_HIGH_GAIN) ||
          alt_code != (exp_lg ? lg_code : hg_code)) begin
        failures++;
        if (failures < 10)
          $display("lg=%0d hg=%0d force=%0b -> alt=%0d flag=%0d", lg_code, hg_code, force_lg,
                   alt_code, alt_gain);
      end
      if (exp_lg) n_lg++; else n_hg++;
    end
    checks++;
    if (n_lg == 0 || n_hg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
