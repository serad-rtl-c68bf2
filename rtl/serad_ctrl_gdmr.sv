// serad_ctrl_gdmr: sized guarded-dual-modular-redundant SERAD controller.
//
// Two copies (rails) of the controller next-state logic run side by side.
// Rail 1 sees L.req1, R.ack1, done1; rail 2 sees L.req2, R.ack2, done2; both
// see rst_n, Err, Corr and the guarded CLK and L.ack fed back. Each pair of
// rail outputs is merged by a guard gate, so a transient inside one rail or
// on one rail's inputs cannot reach CLK, L.ack1/2 or R.req1/2. The guarded
// L.ack drives both L.ack1 and L.ack2, likewise R.req. done1 and done2 come
// from CLK through two asymmetric delay lines (rise sigma, fall DONE_FALL),
// which set how long the latches stay transparent.
//
// The structure (two rails, three guard gates, two sigma delays, the signal
// names) follows the source template; gate sizing is electrical and is not
// modelled. Inputs lreq.r1/r2 are expected to be already delayed by the
// bundling delay delta (serad_stage places that delay line).
//
// Circuit warning: CLK and L.ack are fed back from the guard gates into the
// rails. This loop is intended (the controller is an asynchronous state
// machine); the guard gates' output delay separates the two passes.
//
// Timing: CLK is high for SIGMA + GG_DELAY after each rise; a new pulse
// starts GG_DELAY after its enabling input transition.
module serad_ctrl_gdmr
  import serad_pkg::*;
#(
  parameter bit          TOKEN     = 1'b0,
  parameter int unsigned SIGMA     = SIGMA_PS,
  parameter int unsigned DONE_FALL = DONE_FALL_PS,
  parameter int unsigned GG_DELAY  = GG_DELAY_PS
) (
  input  logic  rst_n,
  input  logic  err,
  input  logic  corr,
  input  dual_t lreq,
  input  dual_t rack,
  output dual_t lack,
  output dual_t rreq,
  output logic  clk
);
  timeunit 1ps;
  timeprecision 1ps;

  logic done1, done2;
  logic lack1_n, rreq1_n, clk1_n;   // rail 1 next values
  logic lack2_n, rreq2_n, clk2_n;   // rail 2 next values
  logic lack_g, rreq_g;

  asym_delay #(.RISE(SIGMA), .FALL(DONE_FALL)) u_done1 (.a(clk), .y(done1));
  asym_delay #(.RISE(SIGMA), .FALL(DONE_FALL)) u_done2 (.a(clk), .y(done2));

  serad_ctrl_rail #(.TOKEN(TOKEN)) u_rail1 (
    .rst_n, .err, .corr, .lreq(lreq.r1), .rack(rack.r1), .done(done1),
    .clk_fb(clk), .lack_fb(lack.r1),
    .lack(lack1_n), .rreq(rreq1_n), .clk(clk1_n));

  serad_ctrl_rail #(.TOKEN(TOKEN)) u_rail2 (
    .rst_n, .err, .corr, .lreq(lreq.r2), .rack(rack.r2), .done(done2),
    .clk_fb(clk), .lack_fb(lack.r2),
    .lack(lack2_n), .rreq(rreq2_n), .clk(clk2_n));

  guard_gate #(.DELAY(GG_DELAY)) u_gg_lack (.a(lack1_n), .b(lack2_n), .y(lack_g));
  guard_gate #(.DELAY(GG_DELAY)) u_gg_rreq (.a(rreq1_n), .b(rreq2_n), .y(rreq_g));
  guard_gate #(.DELAY(GG_DELAY)) u_gg_clk  (.a(clk1_n),  .b(clk2_n),  .y(clk));

  assign lack = '{r1: lack_g, r2: lack_g};
  assign rreq = '{r1: rreq_g, r2: rreq_g};
endmodule
