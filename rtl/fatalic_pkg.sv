// fatalic_pkg: constants and types shared by the FATALIC digital block and its
// behavioural analog models.
//
// Numbers from the published design: 12-bit codes, 12 pipeline stages of
// 1.5 bit each, the 600-count low-gain threshold of the dynamic gain switch,
// the 833 kS/s slow ADC (one code every 48 cycles of the 40 MHz clock, i.e.
// 1.2 us) and its 10 Mbit/s serial output (one bit every 4 clocks).
// Choices of this implementation: the encoding of the gain flag (1 = low gain)
// and the fixed alignment skew of the pipeline stages (two stages per clock).
package fatalic_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Resolution of every ADC and of the fast and slow output words.
  localparam int unsigned ADC_BITS      = 12;
  // Cascaded 1.5-bit stages per pipelined ADC.
  localparam int unsigned N_STAGES      = 12;
  // Alternative gain = low gain when the low-gain code is >= this value.
  localparam int unsigned LG_THRESHOLD  = 600;
  // 40 MHz clocks per slow-channel conversion (40 MHz / 833 kHz).
  localparam int unsigned SLOW_DIV      = 48;
  // 40 MHz clocks per serial slow-channel bit (40 MHz / 10 Mbit/s).
  localparam int unsigned SLOW_BIT_CLKS = 4;
  // Total latency of an ADC conversion (sample clock edge to corrected code),
  // in conversion clocks.
  localparam int unsigned ADC_LATENCY   = 8;

  typedef logic [ADC_BITS-1:0] adc_code_t;

  // 2-bit output word [b2 b1] of one pipeline stage; 2'b11 never occurs.
  typedef logic [1:0] stage_word_t;
  localparam stage_word_t STAGE_LOW  = 2'b00;  // Vin < -Vref/4
  localparam stage_word_t STAGE_MID  = 2'b01;  // -Vref/4 <= Vin <= Vref/4
  localparam stage_word_t STAGE_HIGH = 2'b10;  // Vin > Vref/4

  // Which channel the alternative-gain output carries (the output flag).
  typedef enum logic {
    ALT_HIGH_GAIN = 1'b0,
    ALT_LOW_GAIN  = 1'b1
  } alt_gain_e;

  // Clock cycles by which the word of stage s arrives after the word of
  // stage 0: consecutive stages work on opposite clock phases, so two stages
  // complete per clock.
  function automatic int unsigned stage_skew(int unsigned s);
    return s / 2;
  endfunction

endpackage
