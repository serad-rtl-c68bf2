// tb_q_flop: checks that Err/Corr reflect d at the rising edge of sample,
// ignore later changes of d, are never both high and clear when sample falls
// or while rst_n is low.
module tb_q_flop;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned QPD = 10;
  logic rst_n, sample, d, err, corr;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  q_flop #(.QPD(QPD)) dut (.rst_n, .sample, .d, .err, .corr);
  initial begin
    rst_n = 0; sample = 1; d = 0; #(QPD+1);
    check(!err && !corr, "both low in reset while sample high");
    rst_n = 1; #20 sample = 0; #50;
    check(!err && !corr, "both low while sample low");
    for (int k = 0; k < 30; k++) begin
      logic v;
      v = 1'($urandom);
      d = v; #10 sample = 1; #(QPD+1);
      check(err == v && corr == !v, "sampled value");
      d = ~v; #20;
      check(err == v && corr == !v, "d ignored after edge");
      check(!(err && corr), "never both");
      sample = 0; #(QPD+1);
      check(!err && !corr, "cleared when sample falls");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
