// serad_pkg: types and default timing shared by the SERAD stage blocks.
//
// A SERAD handshake wire is carried twice (double rail, "1" and "2"), one
// copy per controller rail, so that a single-event transient on one copy can
// be filtered by the guard gates. dual_t bundles the two copies.
//
// The default delays (picoseconds) are this design's own choice: the source
// template gives the delay relations (delta = Delta - sigma, eqs. for the
// EDL delay lines) but no numbers.
package serad_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  // Two copies of one handshake wire.
  typedef struct packed {
    logic r1;
    logic r2;
  } dual_t;

  // sigma = max(phi, tau): high time of CLK, set by the done delay line.
  localparam int unsigned SIGMA_PS     = 100;
  // delta: bundling delay on L.req between controllers (Delta - sigma).
  localparam int unsigned DELTA_PS     = 300;
  // Falling delay of the asymmetric done delay line.
  localparam int unsigned DONE_FALL_PS = 10;
  // Output delay of a guard gate.
  localparam int unsigned GG_DELAY_PS  = 10;
  // EDL delays: transition-detector delay delta_p, compensation delay
  // (rise/fall), setup delay delta_Su, hold delay delta_H, Q-flop delay.
  localparam int unsigned DP_PS        = 20;
  localparam int unsigned COMP_R_PS    = 20;
  localparam int unsigned COMP_F_PS    = 30;
  localparam int unsigned SU_PS        = 40;
  localparam int unsigned H_PS         = 20;
  localparam int unsigned QPD_PS       = 10;
endpackage
