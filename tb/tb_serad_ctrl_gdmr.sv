// tb_serad_ctrl_gdmr: runs the GDMR controller with a model of the EDL
// (Corr, or Err when asked, 80 ps after CLK falls; cleared 70 ps after CLK
// rises) and a test-driven left and right channel. Checks the handshake
// sequence, the CLK high time (sigma + guard delay), one re-sample on Err,
// that L.ack1/L.ack2 and R.req1/R.req2 agree, and SET resilience:
//   case I  - a transient on rail 1's internal CLK node must not reach CLK;
//   case II - a transient on R.ack1 must not disturb CLK, L.ack or R.req.
module tb_serad_ctrl_gdmr;
  import serad_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic  rst_n, err, corr, clk, inj;
  dual_t lreq, rack, lack, rreq;
  int pulses = 0, out_changes = 0;
  realtime t_rise;

  serad_ctrl_gdmr dut (.rst_n, .err, .corr, .lreq, .rack, .lack, .rreq, .clk);

  always @(negedge clk) if (rst_n) begin
    check($realtime - t_rise == real'(SIGMA_PS + GG_DELAY_PS), "CLK high time");
    #80;
    if (inj) begin err = 1'b1; inj = 1'b0; end
    else corr = 1'b1;
  end
  always @(posedge clk) begin
    if (rst_n) begin pulses++; t_rise = $realtime; end
    #70; err = 1'b0; corr = 1'b0;
  end
  always @(lack or rreq) if (rst_n) out_changes++;

  task automatic both(inout dual_t s, input logic v);
    s = '{r1: v, r2: v};
  endtask

  initial begin
    rst_n = 0; err = 0; corr = 0; inj = 0; lreq = '0; rack = '0;
    #500;
    check(!clk && lack == '0 && rreq == '0, "reset outputs low");
    rst_n = 1; #50;
    check(lack == 2'b11 && rreq == 2'b00, "L.ack1/2 high after reset");
    // first half
    both(rack, 1); both(lreq, 1); #600;
    check(pulses == 1, "one CLK pulse");
    check(lack == 2'b00 && rreq == 2'b11, "L.ack- R.req+ after Corr");
    // case II: SET on R.ack1 while waiting for R.ack- (second half)
    both(lreq, 0);
    out_changes = 0;
    #300;
    rack.r1 = 1'b0; #40 rack.r1 = 1'b1; #300;
    check(pulses == 1 && out_changes == 0, "SET on R.ack1 filtered");
    // case I: SET on rail 1's CLK next-state node while idle
    force dut.clk1_n = 1'b1; #40 release dut.clk1_n; #200;
    check(pulses == 1 && !clk, "SET inside rail 1 filtered");
    // second half with re-sample
    inj = 1;
    both(rack, 0); #900;
    check(pulses == 3, $sformatf("re-sample on Err: pulses %0d", pulses));
    check(lack == 2'b11 && rreq == 2'b00, "L.ack+ R.req- after Corr");
    // several more clean cycles
    for (int k = 0; k < 6; k++) begin
      logic v;
      v = (k % 2 == 0);
      both(lreq, v); #($urandom_range(0, 200)); both(rack, v); #700;
      check(pulses == 4 + k, "cycle pulse count");
      check(lack == {2{!v}} && rreq == {2{v}}, "handshake outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
