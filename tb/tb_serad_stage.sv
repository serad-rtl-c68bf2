// tb_serad_stage: one SERAD stage between a test producer and consumer.
// Each item is presented on data together with an L.req toggle (both rails);
// the stage must latch it, toggle R.req and acknowledge. Some items get a
// transient on data: either inside the transparent phase, or one that
// starts just before the latch closes and ends inside the hold window, so
// the latch first captures a wrong value. In both cases the EDL must raise
// Err, the stage must re-sample (exactly two CLK pulses) and R.data must be
// the clean value when R.req toggles.
module tb_serad_stage;
  import serad_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned W = 32;
  localparam int unsigned NITEMS = 16;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic rst_n, clk, err, corr;
  dual_t lreq, lack, rreq, rack;
  logic [W-1:0] data, q, clean, glitch;

  serad_stage #(.WIDTH(W)) dut (.rst_n, .lreq, .lack, .rreq, .rack, .data, .q, .clk, .err, .corr);

  assign data = clean ^ glitch;

  int pulses = 0, errs = 0;
  always @(posedge clk) if (rst_n) pulses++;
  always @(posedge err) if (rst_n) errs++;

  initial begin
    rst_n = 0; lreq = '0; rack = '{r1: 1'b1, r2: 1'b1}; clean = '0; glitch = '0;
    #1000 rst_n = 1; #100;
    check(lack == 2'b11, "L.ack high after reset");
    for (int k = 0; k < NITEMS; k++) begin
      int p0, e0, kind;
      logic v;
      kind = k % 3;            // 0 clean, 1 SET while open, 2 SET into hold window
      p0 = pulses; e0 = errs;
      v = ~lreq.r1;
      clean = $urandom;
      lreq = '{r1: v, r2: v};
      if (kind != 0) begin
        @(posedge clk);
        if (kind == 1) begin #30 glitch = 32'h0001_0000; #40 glitch = '0; end
        else begin #(SIGMA_PS + GG_DELAY_PS - 10) glitch = 32'h0000_0004; #25 glitch = '0; end
      end
      wait (rreq.r1 == v);
      #10;
      check(q == clean, $sformatf("item %0d kind %0d: q %h exp %h", k, kind, q, clean));
      check(lack == {2{!v}} && rreq == {2{v}}, "handshake outputs");
      check(pulses - p0 == (kind == 0 ? 1 : 2), $sformatf("item %0d: %0d CLK pulses", k, pulses - p0));
      check(errs - e0 == (kind == 0 ? 0 : 1), "Err count");
      #($urandom_range(0, 300));
      rack = '{r1: !v, r2: !v};
      #200;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
