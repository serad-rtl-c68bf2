// tb_asym_delay: checks the separate rising and falling delays, and that a
// short low pulse restarts the full rising delay.
module tb_asym_delay;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned R = 100, F = 10;
  logic a, y;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  asym_delay #(.RISE(R), .FALL(F)) dut (.a, .y);
  initial begin
    a = 0; #300;
    check(y == 0, "idle low");
    a = 1; #(R-1); check(y == 0, "rise not before RISE"); #2; check(y == 1, "rise at RISE");
    #50 a = 0; #(F-1); check(y == 1, "fall not before FALL"); #2; check(y == 0, "fall at FALL");
    a = 1; #60 a = 0; #20 a = 1; #(R-5); check(y == 0, "short high swallowed, rise restarted");
    #10; check(y == 1, "rise RISE after last rising edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
