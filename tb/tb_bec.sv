// tb_bec: checks the binary to excess-1 converter without carry. At 5 bits
// every input is tried and compared with (b + 1) mod 32, which includes the
// rows of the converter's function table (00000 -> 00001, ..., 11111 ->
// 00000). The default 5-bit and a 30-bit instance (the top block of the
// 64-bit multiplier) are also driven with random values and all ones.
module tb_bec;
  logic [4:0]  b5, x5;
  logic [29:0] b30, x30;
  int checks = 0, failures = 0;

  bec          dut5  (.b(b5),  .x(x5));
  bec #(.W(30)) dut30 (.b(b30), .x(x30));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      b5 = 5'(v);
      #1;
      checks++;
      if (x5 !== 5'(v + 1)) begin
        failures++;
        $display("FAIL W=5 b=%05b x=%05b", b5, x5);
      end
    end
    for (int v = 0; v < 2000; v++) begin
      case (v)
        0: b30 = '1;
        1: b30 = '0;
        2: b30 = 30'h1fff_ffff;
        default: b30 = 30'($urandom) | ((v % 4 == 0) ? 30'h0000_3fff : 30'h0);
      endcase
      #1;
      checks++;
      if (x30 !== b30 + 30'd1) begin
        failures++;
        $display("FAIL W=30 b=%h x=%h", b30, x30);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
