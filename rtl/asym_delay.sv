// asym_delay: behavioural model of an asymmetric delay line.
//
// Rising edges are delayed by RISE ps, falling edges by FALL ps. As in a
// gate chain whose every gate also sees the input directly, a falling input
// resets the line after FALL ps whatever its state, so a short low pulse
// between two highs restarts the full RISE delay; pulses shorter than the
// delay of their edge are swallowed (inertial delay). In a SERAD stage it
// makes the controller's done signal from CLK (rise = sigma, fall short) and
// the EDL's compensation delay from CLK to Y. Not synthesizable logic: the
// delays exist only in simulation.
module asym_delay #(
  parameter int unsigned RISE = 100,
  parameter int unsigned FALL = 10
) (
  input  logic a,
  output wire  y
);
  timeunit 1ps;
  timeprecision 1ps;

  assign #(RISE, FALL) y = a;
endmodule
