// gain_selector: the dynamic gain switch of the digital block.
//
// Only two of the three fast channels leave the chip. The medium-gain code is
// always sent; the second, "alternative" output carries either the high-gain
// or the low-gain code. The choice is made on the low-gain code of the same
// sample: at or above THRESHOLD counts (600 in the design) the high-gain
// channel is taken as saturated and the low-gain code is sent, below it the
// high-gain code is sent. The force_lg input bit pins the choice to low gain.
// alt_gain reports which channel alt_code holds (the chip's output flag).
//
// Purely combinational; the three codes must belong to the same sample, which
// holds because all three fast ADCs have the same fixed latency.
// From the paper: the 600-count threshold, the comparison on the low-gain
// channel (>= selects low gain), the force-low-gain input bit, the flag.
// Own choice: flag encoding (alt_gain_e, 1 = low gain).
module gain_selector
  import fatalic_pkg::*;
#(
  parameter int unsigned NBITS     = ADC_BITS,
  parameter int unsigned THRESHOLD = LG_THRESHOLD
) (
  input  logic [NBITS-1:0] hg_code,
  input  logic [NBITS-1:0] lg_code,
  input  logic             force_lg,
  output logic [NBITS-1:0] alt_code,
  output alt_gain_e        alt_gain
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    if (force_lg || (32'(lg_code) >= THRESHOLD)) begin
      alt_code = lg_code;
      alt_gain = ALT_LOW_GAIN;
    end else begin
      alt_code = hg_code;
      alt_gain = ALT_HIGH_GAIN;
    end
  end

endmodule
