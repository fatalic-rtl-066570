// tb_fast_output_ddr: self-checking testbench of the double-data-rate output.
//
// A new random (medium, alternative, flag) triple is presented after every
// rising edge, as the digital corrections do. The pins are probed in the
// middle of each high phase (must show the medium-gain code presented before
// the last rising edge) and of each low phase (must show the alternative code
// of the same sample, with its flag).
module tb_fast_output_ddr;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [ADC_BITS-1:0] mg_code = '0, alt_code = '0, dout;
  alt_gain_e alt_gain_in = ALT_HIGH_GAIN, gain_flag;
  int checks = 0, failures = 0;

  fast_output_ddr dut (.clk, .rst_n, .mg_code, .alt_code, .alt_gain_in, .dout, .gain_flag);

  always #12.5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ADC_BITS-1:0] mg_prev, alt_prev;
  alt_gain_e           flag_prev;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(posedge clk);
      // values presented before this edge
      mg_prev = mg_code; alt_prev = alt_code; flag_prev = alt_gain_in;
      #1;
      mg_code     = 12'($urandom);
      alt_code    = 12'($urandom);
      alt_gain_in = alt_gain_e'($urandom_range(1));
      #5;  // middle of high phase
      if (i > 0) begin
        checks++;
        if (dout != mg_prev) begin
          failures++;
          if (failures < 10) $display("high phase: dout %0d expected %0d", dout, mg_prev);
        end
      end
      @(negedge clk);
      #6;  // middle of low phase
      if (i > 0) begin
        checks++;
        if (dout != alt_prev || gain_flag != flag_prev) begin
          failures++;
          if (failures < 10) $display("low phase: dout %0d flag %0d expected %0d %0d",
                                      dout, gain_flag, alt_prev, flag_prev);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
