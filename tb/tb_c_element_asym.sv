// tb_c_element_asym: exhaustive check of the asymmetric C-element against a
// reference next-state function y' = (a & plus) | (y & (a | minus)).
module tb_c_element_asym;
  timeunit 1ps;
  timeprecision 1ps;
  logic a, plus, minus, y, ref_y;
  int checks = 0, failures = 0;
  c_element_asym dut (.a, .plus, .minus, .y);
  initial begin
    a = 0; plus = 0; minus = 0; #10; ref_y = 0;
    checks++; if (y != 0) failures++;
    for (int k = 0; k < 400; k++) begin
      {a, plus, minus} = 3'($urandom);
      ref_y = (a & plus) | (ref_y & (a | minus));
      #10;
      checks++;
      if (y != ref_y) begin failures++; $display("FAIL a=%b p=%b m=%b y=%b exp=%b", a, plus, minus, y, ref_y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
