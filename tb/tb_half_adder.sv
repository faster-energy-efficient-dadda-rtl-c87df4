// tb_half_adder: exhaustive check of the (2,2) counter: {c, s} must equal
// a + b for all four input pairs.
module tb_half_adder;
  logic a, b, s, c;
  int checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .s(s), .c(c));

  initial begin : watchdog
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if ({c, s} !== 2'(int'(a) + int'(b))) begin
        failures++;
        $display("FAIL a=%0b b=%0b -> c=%0b s=%0b", a, b, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
