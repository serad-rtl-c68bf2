// c_element_asym: asymmetric C-element of the SERAD error detecting logic.
//
// Inputs: a (symmetric, the delayed clock Y), plus (used only for the rising
// transition, the transition-detector pulse X) and minus (used only for the
// falling transition, Sample_bar). The output rises when a and plus are both
// high, falls when a and minus are both low, and holds otherwise. It thus
// remembers any data transition seen while Y is high until the Q-flop has
// sampled it and Sample_bar has fallen. Zero-delay model.
//
// Circuit warning: the output is a latch (set/reset storage); intended.
module c_element_asym (
  input  logic a,
  input  logic plus,
  input  logic minus,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  always_latch begin
    if (a && plus)        y = 1'b1;
    else if (!a && !minus) y = 1'b0;
  end
endmodule
