// delay_line: behavioural model of a symmetric delay element.
//
// Not synthesizable logic: a real delay line is a chain of inverters or
// buffers sized in layout. This model delays both edges by DELAY ps and, like
// a gate chain, swallows input pulses shorter than DELAY (inertial delay).
// Used for the double-rail delta line on L.req and the EDL's delta_p,
// Inv-delay1 and Inv-delay2 elements (the inversion is done outside).
module delay_line #(
  parameter int unsigned DELAY = 100
) (
  input  logic a,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  assign #(DELAY) y = a;
endmodule
