// fast_output_ddr: double-data-rate output of the fast channels.
//
// The chip has 12 data pins for the fast channels and sends two 12-bit codes
// per 25 ns clock period over them: the medium-gain code is launched on the
// rising edge of the 40 MHz clock and the alternative-gain code (high or low
// gain, see gain_selector) on the falling edge. The medium-gain code is
// registered on the rising edge, the alternative code and its gain flag on
// the falling edge; the pins show the rising-edge register while the clock is
// high and the falling-edge register while it is low.
//
// Interface/timing: mg_code, alt_code and alt_gain_in are the codes of one
// sample, stable over a clock period (they change after the rising edge).
// The medium-gain code presented before rising edge n is on dout during the
// high phase after edge n; the alternative code of the same sample follows
// during the low phase after falling edge n. gain_flag changes on the falling
// edge together with the alternative data and holds for a full period.
// From the paper: 12 pins, medium gain on the rising edge, alternative gain
// on the falling edge, flag output. Own choices: the clock-steered output
// multiplexer (the clock is used as data select on purpose: that is what a
// DDR pin driver does) and the flag timing.
module fast_output_ddr
  import fatalic_pkg::*;
#(
  parameter int unsigned NBITS = ADC_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NBITS-1:0] mg_code,
  input  logic [NBITS-1:0] alt_code,
  input  alt_gain_e        alt_gain_in,
  output logic [NBITS-1:0] dout,
  output alt_gain_e        gain_flag
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [NBITS-1:0] mg_q, alt_d, alt_q;
  alt_gain_e        gain_d;

  // Rising edge: both codes of a sample are captured together, so the
  // falling-edge register below sends the alternative code of the very
  // sample whose medium-gain code is on the pins during the high phase.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mg_q   <= '0;
      alt_d  <= '0;
      gain_d <= ALT_HIGH_GAIN;
    end else begin
      mg_q   <= mg_code;
      alt_d  <= alt_code;
      gain_d <= alt_gain_in;
    end
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alt_q     <= '0;
      gain_flag <= ALT_HIGH_GAIN;
    end else begin
      alt_q     <= alt_d;
      gain_flag <= gain_d;
    end
  end

  assign dout = clk ? mg_q : alt_q;

endmodule
