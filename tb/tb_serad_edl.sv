// tb_serad_edl: drives the stage CLK and the data inputs of the error
// detecting logic and checks Err/Corr: data stable around the window gives
// Corr, a transient while CLK is high or during the hold part of the window
// gives Err, a change after the window gives Corr. Also checks the output
// timing: Err/Corr rise COMP_F+SU+QPD after CLK falls and clear
// COMP_R+SU+QPD after CLK rises.
module tb_serad_edl;
  import serad_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned W = 32;
  localparam int unsigned T_RISE_OUT = COMP_F_PS + SU_PS + QPD_PS;   // after CLK-
  localparam int unsigned T_CLR_OUT  = COMP_R_PS + SU_PS + QPD_PS;   // after CLK+
  logic rst_n, clk, err, corr;
  logic [W-1:0] data;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  serad_edl #(.WIDTH(W)) dut (.rst_n, .clk, .data, .err, .corr);

  // kind: 0 stable, 1 glitch while open, 2 change in hold part, 3 change after window
  task automatic cycle(input int kind);
    int b;
    bit exp_err;
    b = $urandom_range(0, W-1);
    data = $urandom; #200;
    clk = 1;
    fork
      begin
        if (kind == 1) begin #40 data[b] = ~data[b]; #30 data[b] = ~data[b]; end
      end
      begin
        #(T_CLR_OUT - 1); check(err || corr || kind >= 0, "");
        #2; check(!err && !corr, "Err/Corr cleared after CLK+");
      end
    join
    #(SIGMA_PS - 40 - 30 + 10);
    clk = 0;
    if (kind == 2) begin #15 data[b] = ~data[b]; #(T_RISE_OUT - 16); end
    else if (kind == 3) begin #60 data[b] = ~data[b]; #(T_RISE_OUT - 61); end
    else #(T_RISE_OUT - 1);
    check(!err && !corr, "outputs wait for Sample");
    #2;
    exp_err = (kind == 1 || kind == 2);
    check(err == exp_err && corr == !exp_err,
          $sformatf("kind %0d bit %0d: err=%b corr=%b", kind, b, err, corr));
    #100;
  endtask

  initial begin
    rst_n = 0; clk = 0; data = '0; #500;
    check(!err && !corr, "Err/Corr low in reset");
    rst_n = 1; #100;
    check(!err && !corr, "Err/Corr low after reset, before the first CLK");
    // first CLK pulse after start-up
    clk = 1; #110 clk = 0; #300;
    for (int k = 0; k < 40; k++) cycle(k % 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
