// serad_pipeline: linear soft-error-resilient asynchronous pipeline.
//
// N_STAGES SERAD stages in a row. Each stage's right channel (R.req1/2,
// R.ack1/2) is the next stage's left channel. The producer drives l_req and
// reads l_ack; the consumer reads r_req and drives r_ack; all four are
// double rail (dual_t). Handshakes are two-phase: a producer offers a new
// item by toggling l_req (both copies) and may offer the next one when l_ack
// has become the complement of l_req; a consumer sees a new item on every
// r_req toggle and answers by setting r_ack to the complement of r_req
// (r_ack is 1 after reset: ready).
//
// The combinational logic between latches is the user's: stage_d[i] is the
// logic output feeding stage i's latches (stage_d[0] is computed from the
// producer's data), stage_q[i] is stage i's latch output, stage_q[N_STAGES-1]
// is the pipeline output. Logic delay from stage_q[i-1] (or the producer's
// data) to stage_d[i] must stay below DELTA + SIGMA.
//
// Every stage is a normal controller unless its bit of TOKEN_MASK is set.
// Structure follows the source template; widths, delays and the token
// placement are this design's choices.
module serad_pipeline
  import serad_pkg::*;
#(
  parameter int unsigned N_STAGES   = 4,
  parameter int unsigned WIDTH      = 32,
  parameter int unsigned DELTA      = DELTA_PS,
  parameter int unsigned SIGMA      = SIGMA_PS,
  parameter logic [N_STAGES-1:0] TOKEN_MASK = '0
) (
  input  logic                            rst_n,
  input  dual_t                           l_req,
  output dual_t                           l_ack,
  output dual_t                           r_req,
  input  dual_t                           r_ack,
  input  logic [N_STAGES-1:0][WIDTH-1:0]  stage_d,
  output logic [N_STAGES-1:0][WIDTH-1:0]  stage_q,
  output logic [N_STAGES-1:0]             stage_clk,
  output logic [N_STAGES-1:0]             stage_err,
  output logic [N_STAGES-1:0]             stage_corr
);
  timeunit 1ps;
  timeprecision 1ps;

  // req[i]/ack[i]: channel into stage i; index N_STAGES is the output channel.
  dual_t req [N_STAGES+1];
  dual_t ack [N_STAGES+1];

  assign req[0] = l_req;
  assign l_ack  = ack[0];
  assign r_req  = req[N_STAGES];
  assign ack[N_STAGES] = r_ack;

  for (genvar i = 0; i < N_STAGES; i++) begin : g_stage
    serad_stage #(
      .WIDTH(WIDTH), .TOKEN(TOKEN_MASK[i]), .DELTA(DELTA), .SIGMA(SIGMA)
    ) u_stage (
      .rst_n,
      .lreq(req[i]),   .lack(ack[i]),
      .rreq(req[i+1]), .rack(ack[i+1]),
      .data(stage_d[i]), .q(stage_q[i]),
      .clk(stage_clk[i]), .err(stage_err[i]), .corr(stage_corr[i]));
  end
endmodule
