// tb_slow_serializer: self-checking testbench of the slow-channel timing and
// serial output.
//
// Checks that conv_en pulses once every 48 clocks (833 kHz from 40 MHz),
// and that each 48-clock frame carries, MSB first with every bit held for 4
// clocks (10 Mbit/s), the code present on slow_code at the last clock of the
// previous frame. The test changes slow_code to a new random value once per
// frame, right after conv_en, as the slow digital correction does.
module tb_slow_serializer;
  import fatalic_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [ADC_BITS-1:0] slow_code = '0;
  logic conv_en, sdata;
  int checks = 0, failures = 0;

  slow_serializer dut (.clk, .rst_n, .slow_code, .conv_en, .sdata);

  always #12.5 clk = ~clk;

  initial begin
    #(25 * 48 * 100);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;            // clocks since reset release
  int last_en = -1;
  logic [ADC_BITS-1:0] sent_code, rx;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 60; f++) begin
      // frame f occupies clocks 48f .. 48f+47 after reset release
      rx = '0;
      for (int c = 0; c < 48; c++) begin
        // sample in the middle of the clock period
        if (c % 4 == 2 && c / 4 < ADC_BITS) rx = {rx[ADC_BITS-2:0], sdata};
        checks++;
        if (conv_en != (c == 0)) begin
          failures++;
          if (failures < 10) $display("frame %0d clk %0d: conv_en=%0b", f, c, conv_en);
        end
        if (c == 47) sent_code = slow_code;  // captured on this clock's edge
        @(posedge clk);
        #1;
        if (c == 0) slow_code = 12'($urandom);
        @(negedge clk);
      end
      if (f > 0) begin
        checks++;
        if (rx != prev_sent) begin
          failures++;
          if (failures < 10) $display("frame %0d: received %h expected %h", f, rx, prev_sent);
        end
      end
      prev_sent = sent_code;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [ADC_BITS-1:0] prev_sent;
endmodule
