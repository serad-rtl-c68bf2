// guard_gate: merges the two rail copies of a SERAD controller output.
//
// The output follows the inputs only when both copies agree and holds its
// value while they differ, so a transient on one rail (or on one rail's
// inputs) never reaches the output. This is the Muller C-element behaviour
// of a guard gate. In silicon the gate is also sized so that a strike on its
// own output node is attenuated; that electrical property is not modelled.
// DELAY is the gate's output delay; it also provides the loop delay on the
// controller's feedback wires (CLK and L.ack are fed back to the rails).
//
// Circuit warning: the state is held in a latch enabled by a == b. This is
// the intended storage of the C-element.
module guard_gate #(
  parameter int unsigned DELAY = 10
) (
  input  logic a,
  input  logic b,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  logic state;

  always_latch begin
    if (a == b) state = a;
  end

  assign #(DELAY) y = state;
endmodule
