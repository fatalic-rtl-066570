// current_conveyor_model: BEHAVIOURAL MODEL (analog, not synthesizable) of the
// FATALIC input stage, the current conveyor system.
//
// The PMT anode current (negative polarity) enters a low-impedance node that
// feeds the sources of four common-gate NMOS of equal length and widths
// Wfast (high gain), Wfast/8 (medium gain), Wfast/64 (low gain) and
// Wslow = 8*Wfast (slow channel). With equal gate lengths the input current,
// together with the bias current set by a current mirror (0.5 mA nominal),
// divides between them in proportion to width: 1/9.14 to high gain, 1/73.1
// to medium gain, 1/585 to low gain and 8/9.14 (about 87%) to the slow
// channel, which sets the 1 : 8 : 64 gain ratios. PMOS mirrors copy each drain
// current to a differential output stage; a dummy replica of the input stage
// supplies the same share of the bias current, which is subtracted so that
// only the signal share is left. A tuning current from a DAC is added per
// output to set the pedestal.
//
// Ports are real-valued currents in ampere. i_pmt is the anode current
// (negative for a PMT pulse); each output is the differential current
// delivered to the shaper of one channel, positive for a PMT pulse.
// Timing: instantaneous (no bandwidth limit is modelled).
// From the paper: the four widths, the bias value, the bias subtraction by a
// dummy stage, the per-channel DAC pedestal tuning. Own choices: ideal
// width-proportional division, no input-impedance or noise modelling, the
// pedestal currents as direct real-valued inputs (the DAC code format is
// not published).
module current_conveyor_model #(
  parameter real I_BIAS = 0.5e-3,      // input-stage bias current [A]
  parameter real W_HG   = 1.0,         // widths in units of Wfast
  parameter real W_MG   = 1.0 / 8.0,
  parameter real W_LG   = 1.0 / 64.0,
  parameter real W_SLOW = 8.0
) (
  input  real i_pmt,
  input  real i_dac_hg,
  input  real i_dac_mg,
  input  real i_dac_lg,
  input  real i_dac_slow,
  output real i_hg,
  output real i_mg,
  output real i_lg,
  output real i_slow
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam real W_SUM = W_HG + W_MG + W_LG + W_SLOW;

  // Current in each common-gate branch: its share of bias plus signal.
  // (i_pmt < 0 pulls extra current through the branches.)
  real i_node;
  assign i_node = I_BIAS - i_pmt;

  // Output = mirrored branch current minus the dummy's bias share + DAC.
  assign i_hg   = (W_HG   / W_SUM) * i_node - (W_HG   / W_SUM) * I_BIAS + i_dac_hg;
  assign i_mg   = (W_MG   / W_SUM) * i_node - (W_MG   / W_SUM) * I_BIAS + i_dac_mg;
  assign i_lg   = (W_LG   / W_SUM) * i_node - (W_LG   / W_SUM) * I_BIAS + i_dac_lg;
  assign i_slow = (W_SLOW / W_SUM) * i_node - (W_SLOW / W_SUM) * I_BIAS + i_dac_slow;

endmodule
