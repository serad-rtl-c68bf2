// tb_guard_gate: checks that the output changes only when both inputs agree
// and that a transient on one input never reaches the output.
module tb_guard_gate;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned D = 10;
  logic a, b, y;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  guard_gate #(.DELAY(D)) dut (.a, .b, .y);
  initial begin
    a = 0; b = 0; #50; check(y == 0, "both 0");
    a = 1; #50; check(y == 0, "a alone does not set");
    b = 1; #(D-1); check(y == 0, "delay"); #2; check(y == 1, "both 1 sets after DELAY");
    b = 0; #50; check(y == 1, "b alone does not clear");
    a = 0; #(D+1); check(y == 0, "both 0 clears");
    for (int k = 0; k < 20; k++) begin
      logic v;
      v = 1'($urandom);
      a = v; b = v; #30; check(y == v, "follows agreeing inputs");
      if ($urandom_range(0, 1)) a = ~v; else b = ~v;
      #($urandom_range(5, 40)); check(y == v, "holds on disagreement");
      a = v; b = v; #30; check(y == v, "no glitch after SET");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
