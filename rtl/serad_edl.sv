// serad_edl: SERAD error detecting logic of one pipeline stage.
//
// Every data bit has a transition detector (the bit XORed with a copy
// delayed by DP) whose pulse X sets an asymmetric C-element while Y is high.
// Y is CLK through a compensation delay (rise COMP_R, fall COMP_F), so the
// detection window is the latch's transparent phase plus its hold time: the
// SET filtering window. The C-element outputs are ORed and sampled by the
// Q-flop on the rising edge of Sample, which is Y inverted and delayed by SU;
// Sample_bar (Sample inverted and delayed by H) clears the C-elements only
// after the Q-flop has sampled. The Q-flop answers with Err (a transition was
// seen: re-sample) or Corr (data was stable), both cleared when CLK rises
// again (Sample falls).
//
// The structure follows the source template's EDL figure; the delays are
// this design's choice, picked to meet its constraints:
//   COMP_R = xor delay + X pulse width,  COMP_F = COMP_R + latch hold time,
//   SU >= C-element + OR tree + Q-flop setup,  H >= Q-flop hold.
// A transient inside the EDL itself can only cause a needless re-sample.
//
// rst_n only clears the Q-flop, so Err and Corr are both 0 before the first
// CLK pulse.
//
// Timing: Err/Corr rise COMP_F + SU + QPD after CLK falls and clear
// COMP_R + SU + QPD after CLK rises.
module serad_edl
  import serad_pkg::*;
#(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned DP     = DP_PS,
  parameter int unsigned COMP_R = COMP_R_PS,
  parameter int unsigned COMP_F = COMP_F_PS,
  parameter int unsigned SU     = SU_PS,
  parameter int unsigned H      = H_PS,
  parameter int unsigned QPD    = QPD_PS
) (
  input  logic             rst_n,
  input  logic             clk,
  input  logic [WIDTH-1:0] data,
  output logic             err,
  output logic             corr
);
  timeunit 1ps;
  timeprecision 1ps;

  logic             y, sample, sample_bar, or_tree;
  logic [WIDTH-1:0] data_d, x, c;

  asym_delay #(.RISE(COMP_R), .FALL(COMP_F)) u_comp (.a(clk), .y(y));
  delay_line #(.DELAY(SU)) u_inv_delay1 (.a(~y),      .y(sample));
  delay_line #(.DELAY(H))  u_inv_delay2 (.a(~sample), .y(sample_bar));

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    delay_line #(.DELAY(DP)) u_dp (.a(data[i]), .y(data_d[i]));
    assign x[i] = data[i] ^ data_d[i];
    c_element_asym u_c (.a(y), .plus(x[i]), .minus(sample_bar), .y(c[i]));
  end

  assign or_tree = |c;

  q_flop #(.QPD(QPD)) u_qflop (.rst_n, .sample, .d(or_tree), .err, .corr);
endmodule
