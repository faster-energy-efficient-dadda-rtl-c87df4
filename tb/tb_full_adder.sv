// tb_full_adder: exhaustive check of the (3,2) counter: {c, s} must equal
// a + b + ci for all eight input combinations.
module tb_full_adder;
  logic a, b, ci, s, c;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .ci(ci), .s(s), .c(c));

  initial begin : watchdog
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, ci} = 3'(v);
      #1;
      checks++;
      if ({c, s} !== 2'(int'(a) + int'(b) + int'(ci))) begin
        failures++;
        $display("FAIL a=%0b b=%0b ci=%0b -> c=%0b s=%0b", a, b, ci, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
