// tb_delay_line: checks that both edges are delayed by DELAY and that a
// pulse shorter than DELAY is swallowed.
module tb_delay_line;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned D = 50;
  logic a, y;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  delay_line #(.DELAY(D)) dut (.a, .y);
  initial begin
    a = 0; #200;
    check(y == 0, "idle low");
    a = 1; #(D-1); check(y == 0, "rise not before D"); #2; check(y == 1, "rise at D");
    #100 a = 0; #(D-1); check(y == 1, "fall not before D"); #2; check(y == 0, "fall at D");
    #100 a = 1; #10 a = 0; #(2*D); check(y == 0, "short pulse swallowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
