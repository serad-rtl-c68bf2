// dice_latch: the data latch bank of a SERAD stage.
//
// WIDTH transparent-high latches: q follows d while en (the stage CLK) is
// high and holds when en is low. In silicon each bit is a DICE (dual
// interlocked storage cell) latch, whose four cross-coupled nodes restore a
// single upset node; that immunity is a transistor-level property and is not
// represented here, only the latch function.
//
// Circuit warning: the latches are intended (two-phase latch-based design).
module dice_latch #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  timeunit 1ps;
  timeprecision 1ps;

  always_latch begin
    if (en) q = d;
  end
endmodule
