// tb_mbecwc: checks the mux-with-BECWC block: {cout, y} = {0, d} when
// sel = 0 and d + 1 with its carry when sel = 1. Exhaustive at the default
// 4 bits and at 8 bits.
module tb_mbecwc;
  logic [3:0] d4, y4;
  logic [7:0] d8, y8;
  logic       c4, c8, sel;
  int checks = 0, failures = 0;

  mbecwc          dut4 (.d(d4), .sel(sel), .y(y4), .cout(c4));
  mbecwc #(.W(8)) dut8 (.d(d8), .sel(sel), .y(y8), .cout(c8));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {sel, d8} = 9'(v);
      d4 = d8[3:0];
      #1;
      checks++;
      if ({c8, y8} !== 9'(d8) + 9'(sel)) begin
        failures++;
        $display("FAIL W=8 sel=%0b d=%h -> %0b %h", sel, d8, c8, y8);
      end
      if (v[7:4] == 4'd0) begin
        checks++;
        if ({c4, y4} !== 5'(d4) + 5'(sel)) begin
          failures++;
          $display("FAIL W=4 sel=%0b d=%h -> %0b %h", sel, d4, c4, y4);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
