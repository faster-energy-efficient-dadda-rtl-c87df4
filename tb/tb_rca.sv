// tb_rca: exhaustive check of the ripple carry adder at 3 bits (the 8x8
// multiplier's size) and at its default 6 bits: {co, s} must equal a + b.
module tb_rca;
  logic [2:0] a3, b3, s3;
  logic       co3;
  logic [5:0] a6, b6, s6;
  logic       co6;
  int checks = 0, failures = 0;

  rca #(.W(3)) dut3 (.a(a3), .b(b3), .s(s3), .co(co3));
  rca          dut6 (.a(a6), .b(b6), .s(s6), .co(co6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 64; x++)
      for (int y = 0; y < 64; y++) begin
        a6 = 6'(x); b6 = 6'(y);
        a3 = 3'(x); b3 = 3'(y);
        #1;
        checks++;
        if ({co6, s6} !== 7'(x + y)) begin
          failures++;
          $display("FAIL W=6 %0d + %0d -> %0d", x, y, {co6, s6});
        end
        if (x < 8 && y < 8) begin
          checks++;
          if ({co3, s3} !== 4'(x + y)) begin
            failures++;
            $display("FAIL W=3 %0d + %0d -> %0d", x, y, {co3, s3});
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
