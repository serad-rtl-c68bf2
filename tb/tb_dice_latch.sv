// tb_dice_latch: checks transparency while en is high and holding while low.
module tb_dice_latch;
  timeunit 1ps;
  timeprecision 1ps;
  localparam int unsigned W = 32;
  logic en;
  logic [W-1:0] d, q, held;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  dice_latch #(.WIDTH(W)) dut (.en, .d, .q);
  initial begin
    for (int k = 0; k < 30; k++) begin
      en = 1; d = $urandom; #5; check(q == d, "transparent");
      d = $urandom; #5; check(q == d, "follows while open");
      held = d; en = 0; #5;
      d = $urandom; #5; check(q == held, "holds while closed");
      d = ~d; #5; check(q == held, "still holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
