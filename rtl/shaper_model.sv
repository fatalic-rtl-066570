// shaper_model: BEHAVIOURAL MODEL (analog, not synthesizable) of a FATALIC
// transimpedance shaper.
//
// The shaper is a fully differential amplifier with an R || C feedback on each
// side. Fed by the differential output current of the current conveyor, it
// integrates the current and converts it to a voltage with time constant
// tau = R*C: 25 ns (5 kOhm, 5 pF) in the fast channels, 100 us (500 kOhm,
// 200 pF) in the slow channel. The amplifier is taken as ideal, so the
// differential output obeys  tau * dV/dt = 2*R*I - V  (the factor 2 because
// the signal current flows through the feedback network of both sides).
// For the PMT pulse of the specification (4 ns rise, 36 ns fall) the fast
// shaper peaks about 25 ns after the pulse starts.
//
// Ports: i_in differential input current [A], v_out differential output
// voltage [V]. The model advances in steps of DT_NS nanoseconds with the exact
// solution of the first-order equation for a current held over the step.
// From the paper: the topology, R and C of both shaper types. Own choices:
// ideal amplifier (the 84 dB / 650 MHz open-loop figures are not modelled),
// the factor of 2 of the differential output, the time step.
module shaper_model #(
  parameter real R_OHM = 5.0e3,
  parameter real C_F   = 5.0e-12,
  parameter real DT_NS = 0.5
) (
  input  real i_in,
  output real v_out
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam real TAU_NS = R_OHM * C_F * 1.0e9;
  localparam real ALPHA  = 1.0 - $exp(-DT_NS / TAU_NS);

  initial v_out = 0.0;

  always #(DT_NS) v_out = v_out + ALPHA * (2.0 * R_OHM * i_in - v_out);

endmodule
