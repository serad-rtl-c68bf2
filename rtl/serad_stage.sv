// serad_stage: one SERAD bundled-data pipeline stage.
//
// The left request (two copies) passes the delta delay line, which bundles
// it with the data coming through the stage's combinational logic. The GDMR
// controller then opens the DICE latch bank (CLK high for about sigma),
// closes it, and lets the EDL check that data did not move during the
// transparent phase plus hold time. Corr completes the handshake (L.ack and
// R.req toggle); Err makes the controller re-open and close the latches,
// re-sampling the data. The stage therefore pays extra time only when a
// transient is actually seen.
//
// Structure follows the source template's stage figure; the delay values
// are this design's choice (see serad_pkg). The combinational logic is not
// part of the stage: data is its output, q the latch output (R.data).
//
// Assertion: Err and Corr are never high together and are both low when
// done rises (the controller's timing rule).
module serad_stage
  import serad_pkg::*;
#(
  parameter int unsigned WIDTH = 32,
  parameter bit          TOKEN = 1'b0,
  parameter int unsigned DELTA = DELTA_PS,
  parameter int unsigned SIGMA = SIGMA_PS
) (
  input  logic             rst_n,
  input  dual_t            lreq,
  output dual_t            lack,
  output dual_t            rreq,
  input  dual_t            rack,
  input  logic [WIDTH-1:0] data,
  output logic [WIDTH-1:0] q,
  output logic             clk,
  output logic             err,
  output logic             corr
);
  timeunit 1ps;
  timeprecision 1ps;

  dual_t lreq_d;

  // Double-rail delta delay line.
  delay_line #(.DELAY(DELTA)) u_delta1 (.a(lreq.r1), .y(lreq_d.r1));
  delay_line #(.DELAY(DELTA)) u_delta2 (.a(lreq.r2), .y(lreq_d.r2));

  serad_ctrl_gdmr #(.TOKEN(TOKEN), .SIGMA(SIGMA)) u_ctrl (
    .rst_n, .err, .corr, .lreq(lreq_d), .rack, .lack, .rreq, .clk);

  serad_edl #(.WIDTH(WIDTH)) u_edl (.rst_n, .clk, .data, .err, .corr);

  dice_latch #(.WIDTH(WIDTH)) u_latch (.en(clk), .d(data), .q);

  always @(err or corr or u_ctrl.done1) begin
    if (rst_n) begin
      assert (!(err && corr)) else $error("Err and Corr both high");
      assert (!(u_ctrl.done1 && (err || corr))) else $error("Err/Corr not cleared before done");
    end
  end
endmodule
