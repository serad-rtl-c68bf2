// q_flop: radiation-hardened Q-flop of the SERAD error detecting logic.
//
// On the rising edge of sample it samples d (the OR of the stage's
// C-elements) and raises exactly one of its dual-rail outputs: err if d was
// 1 (a transient was seen), corr otherwise. Both outputs are 0 while sample
// is low, i.e. they are cleared when sample falls, and while rst_n is low,
// so that both start at 0 as the source design requires (the reset input is
// this design's choice). QPD is the sample-to-output delay.
//
// The real Q-flop also holds both outputs at 0 until internal
// metastability resolves, and is sized against strikes on its outputs. A
// two-state RTL model cannot become metastable, so only the logic function
// is given: err and corr are never high together.
module q_flop #(
  parameter int unsigned QPD = 10
) (
  input  logic rst_n,
  input  logic sample,
  input  logic d,
  output logic err,
  output logic corr
);
  timeunit 1ps;
  timeprecision 1ps;

  logic e_q, c_q, clr;

  // sample is the clock (rising edge); its complement is an asynchronous
  // clear, so both outputs drop as soon as sample falls. Reset clears too.
  assign clr = ~sample | ~rst_n;

  always_ff @(posedge sample or posedge clr) begin
    if (clr) begin
      e_q <= 1'b0;
      c_q <= 1'b0;
    end else begin
      e_q <= d;
      c_q <= ~d;
    end
  end

  assign #(QPD) err  = e_q;
  assign #(QPD) corr = c_q;
endmodule
