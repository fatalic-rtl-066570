// slow_serializer: timing and serial output of the slow (integrator) channel.
//
// The slow channel's ADC converts at 833 kS/s, one conversion every 1.2 us,
// which is DIV = 48 periods of the 40 MHz clock. Its 12-bit codes leave the
// chip one bit at a time on a single pin at 10 Mbit/s, i.e. BIT_CLKS = 4 clock
// periods per bit, so one code fills exactly one conversion period.
// A modulo-DIV counter provides both: conv_en, a one-clock strobe that
// clocks the slow ADC and its digital correction, and the bit timing of the
// shift register. The latest corrected code is loaded into the shift register
// on the last clock of every period and sent MSB first during the next one.
//
// Interface/timing: after reset the counter starts at 0; conv_en is high when
// the counter is 0. A frame starts on the clock edge where the counter returns
// to 0 (first frame: the edge ending the 48th clock after reset release); bit
// j of the frame (j = 0 is the MSB) is on sdata for the 4 clocks with
// counter values 4j..4j+3. The frame carries the code that slow_code held
// when the counter was DIV-1.
// From the paper: 833 kS/s, 1.2 us per code, 10 Mbit/s, 12 bits, one pin.
// Own choices: MSB-first order, no frame marker (the receiver keeps the
// phase from reset), the strobe position within the period.
module slow_serializer
  import fatalic_pkg::*;
#(
  parameter int unsigned NBITS    = ADC_BITS,
  parameter int unsigned DIV      = SLOW_DIV,
  parameter int unsigned BIT_CLKS = SLOW_BIT_CLKS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NBITS-1:0] slow_code,
  output logic             conv_en,
  output logic             sdata
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned CW = $clog2(DIV);

  if (NBITS * BIT_CLKS > DIV) begin : g_bad_cfg
    $error("slow_serializer: %0d bits of %0d clocks do not fit in %0d clocks",
           NBITS, BIT_CLKS, DIV);
  end

  logic [CW-1:0]    cnt;
  logic [NBITS-1:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      shreg <= '0;
    end else begin
      cnt <= (32'(cnt) == DIV - 1) ? '0 : cnt + 1'b1;
      if (32'(cnt) == DIV - 1)
        shreg <= slow_code;
      else if (32'(cnt) % BIT_CLKS == BIT_CLKS - 1)
        shreg <= {shreg[NBITS-2:0], 1'b0};
    end
  end

  assign conv_en = (cnt == '0);
  assign sdata   = shreg[NBITS-1];

endmodule
