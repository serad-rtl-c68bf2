// tb_serad_ctrl_rail: runs a single controller rail with its outputs fed
// back through 10 ps delays (standing in for the guard gates), done made
// from CLK by a sigma asymmetric delay, and a model of the EDL that answers
// Corr (or Err when asked) 80 ps after CLK falls and clears 70 ps after CLK
// rises. Checks the burst-mode sequence of a normal controller (reset ->
// L.ack+, both halves of the handshake, one re-sample on Err) and of a token
// controller (R.req high after reset, first CLK only after R.ack high then
// low).
module tb_serad_ctrl_rail;
  import serad_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic rst_n;
  // normal rail (index 0) and token rail (index 1)
  logic [1:0] err, corr, lreq, rack, done, clk_fb, lack_fb, lack, rreq, clk, inj;
  int pulses [2];

  serad_ctrl_rail #(.TOKEN(1'b0)) dut0 (.rst_n, .err(err[0]), .corr(corr[0]), .lreq(lreq[0]),
    .rack(rack[0]), .done(done[0]), .clk_fb(clk_fb[0]), .lack_fb(lack_fb[0]),
    .lack(lack[0]), .rreq(rreq[0]), .clk(clk[0]));
  serad_ctrl_rail #(.TOKEN(1'b1)) dut1 (.rst_n, .err(err[1]), .corr(corr[1]), .lreq(lreq[1]),
    .rack(rack[1]), .done(done[1]), .clk_fb(clk_fb[1]), .lack_fb(lack_fb[1]),
    .lack(lack[1]), .rreq(rreq[1]), .clk(clk[1]));

  for (genvar i = 0; i < 2; i++) begin : g_env
    assign #(GG_DELAY_PS) clk_fb[i]  = clk[i];
    assign #(GG_DELAY_PS) lack_fb[i] = lack[i];
    asym_delay #(.RISE(SIGMA_PS), .FALL(DONE_FALL_PS)) u_done (.a(clk_fb[i]), .y(done[i]));
    always @(negedge clk_fb[i]) if (rst_n) begin
      #80;
      if (inj[i]) begin err[i] = 1'b1; inj[i] = 1'b0; end
      else corr[i] = 1'b1;
    end
    always @(posedge clk_fb[i]) begin
      if (rst_n) pulses[i]++;
      #70; err[i] = 1'b0; corr[i] = 1'b0;
    end
  end

  initial begin
    rst_n = 0; err = '0; corr = '0; lreq = '0; rack = '0; inj = '0;
    pulses[0] = 0; pulses[1] = 0;
    #500;
    check(lack == 2'b00 && rreq == 2'b00 && clk == 2'b00, "outputs low in reset");
    rst_n = 1; #50;
    // normal rail: state 1
    check(lack[0] && !rreq[0], "normal: L.ack+ after reset");
    // token rail: state 6
    check(!lack[1] && rreq[1], "token: R.req+ after reset");
    // --- normal rail, first half ---
    rack[0] = 1; #300;
    check(pulses[0] == 0, "no CLK with R.ack alone");
    lreq[0] = 1; #600;
    check(pulses[0] == 1, "one CLK pulse on L.req+ R.ack+");
    check(!lack[0] && rreq[0], "L.ack- R.req+ after Corr");
    // --- second half with one re-sample ---
    inj[0] = 1;
    lreq[0] = 0; #300;
    check(pulses[0] == 1, "waits for R.ack-");
    rack[0] = 0; #900;
    check(pulses[0] == 3, $sformatf("re-sample on Err: pulses %0d", pulses[0]));
    check(lack[0] && !rreq[0], "L.ack+ R.req- after Corr");
    // --- token rail ---
    #100;
    check(pulses[1] == 0, "token waits for R.ack high once");
    rack[1] = 1; #300;
    check(pulses[1] == 0, "token: no CLK while R.ack high");
    rack[1] = 0; #600;
    check(pulses[1] == 1, "token: CLK after R.ack-");
    check(lack[1] && !rreq[1], "token: L.ack+ R.req- after Corr");
    lreq[1] = 1; rack[1] = 1; #600;
    check(pulses[1] == 2, "token: next half");
    check(!lack[1] && rreq[1], "token: L.ack- R.req+");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
