// serad_ctrl_rail: one rail of the SERAD pipeline-stage controller.
//
// The controller is a two-phase burst-mode machine. In the first half of a
// cycle it waits for L.req+ and R.ack+, opens the stage latches (CLK+), keeps
// them open until done (CLK delayed by sigma) rises, closes them (CLK-) and
// waits for the error detecting logic: on Err+ it re-opens the latches
// (re-sampling) and repeats; on Corr+ it answers L.ack- and R.req+. The
// second half is the same with all handshake transitions inverted
// (L.req- R.ack- ... L.ack+ R.req-). After reset a normal controller raises
// L.ack; a token controller (TOKEN=1) instead starts with R.req high, as if
// it had just finished a first half, so it injects one initial token.
//
// This module is the next-state logic of one rail: it outputs the value
// each output should take, and the guard gates of serad_ctrl_gdmr hold the
// real outputs. CLK and L.ack come back as clk_fb and lack_fb. Two internal
// state bits replace the state variable of a 3D-synthesized version:
//   ph : which half of the cycle the rail is in (R.req = ph, L.ack = ~ph);
//   z  : copy of ~ph taken while done is high, i.e. "this half has sampled";
//        pending = z ^ ph means the latch has closed and the rail waits for
//        Err or Corr.
// A rail only starts a new CLK pulse once the guarded L.ack matches its own
// phase, so neither rail can run ahead of the guard gates.
//
// The state machine (states 0-10, the transitions, the signals and the
// asymmetric done delay) follows the source template. The logic itself is
// this design's own: the published sum-of-products equations do not toggle
// R.req/L.ack when checked against the state machine, so they were not used.
// rst_n is the template's rst (outputs are gated by it, i.e. active low).
//
// Timing rules: Err/Corr must return to 0 before done rises after CLK+
// (sigma > compensation + setup delay of the EDL), and done must fall before
// Err/Corr rise after CLK-.
//
// Circuit warnings: ph, z and armed are latches; they are the asynchronous
// machine's state and are intended. The ph -> pending -> ph path is a
// combinational loop through a latch enable; it settles because ph loads z,
// which makes pending 0 and closes the latch again.
module serad_ctrl_rail #(
  parameter bit TOKEN = 1'b0
) (
  input  logic rst_n,
  input  logic err,
  input  logic corr,
  input  logic lreq,     // L.req after the delta delay line
  input  logic rack,
  input  logic done,     // CLK delayed by the asymmetric sigma line
  input  logic clk_fb,   // guarded CLK
  input  logic lack_fb,  // guarded L.ack
  output logic lack,
  output logic rreq,
  output logic clk
);
  timeunit 1ps;
  timeprecision 1ps;

  logic ph, z, armed;
  logic pending, settled, go;

  assign pending = z ^ ph;

  // z: records that the current half has sampled (set while done is high).
  always_latch begin
    if (!rst_n)    z = TOKEN;
    else if (done) z = ~ph;
  end

  // ph: advances to the next half when Corr arrives after a closed sample.
  always_latch begin
    if (!rst_n)                                       ph = TOKEN;
    else if (pending && corr && !clk_fb && !done)     ph = z;
  end

  // armed: a token controller waits for R.ack to have been high once after
  // reset before its first CLK pulse. Always set in a normal controller.
  always_latch begin
    if (!rst_n)    armed = ~TOKEN;
    else if (rack) armed = 1'b1;
  end

  assign settled = (lack_fb == ~ph);
  assign go      = settled && armed &&
                   (ph ? (!lreq && !rack) : (lreq && rack));

  assign clk  = rst_n && ((go && !pending && !done) ||   // 1->2, 6->7
                          (clk_fb && !done)          ||   // hold until done+
                          (err && pending && !done));     // 4->5, 9->10
  assign lack = rst_n && !ph;
  assign rreq = rst_n && ph;
endmodule
