// tb_becwc: checks the binary to excess-1 converter with carry: {cout, x}
// must equal b + 1. Exhaustive at 5 bits (the function table's size, where
// cout is one only for 11111) and at the default 4 bits; random plus all
// ones at 16 bits.
module tb_becwc;
  logic [4:0]  b5, x5;
  logic        c5;
  logic [3:0]  b4, x4;
  logic        c4;
  logic [15:0] b16, x16;
  logic        c16;
  int checks = 0, failures = 0;

  becwc #(.W(5))  dut5  (.b(b5),  .x(x5),  .cout(c5));
  becwc           dut4  (.b(b4),  .x(x4),  .cout(c4));
  becwc #(.W(16)) dut16 (.b(b16), .x(x16), .cout(c16));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      b5 = 5'(v);
      b4 = 4'(v);
      #1;
      checks++;
      if ({c5, x5} !== 6'(v + 1)) begin
        failures++;
        $display("FAIL W=5 b=%05b cy=%0b x=%05b", b5, c5, x5);
      end
      if (v < 16) begin
        checks++;
        if ({c4, x4} !== 5'(v + 1)) begin
          failures++;
          $display("FAIL W=4 b=%04b cy=%0b x=%04b", b4, c4, x4);
        end
      end
    end
    for (int v = 0; v < 2000; v++) begin
      b16 = (v == 0) ? '1 : (v == 1) ? 16'h7fff : 16'($urandom);
      #1;
      checks++;
      if ({c16, x16} !== 17'(b16) + 17'd1) begin
        failures++;
        $display("FAIL W=16 b=%h cy=%0b x=%h", b16, c16, x16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
