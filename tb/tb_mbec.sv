// tb_mbec: checks the mux-with-BEC block: y = d when sel = 0 and d + 1
// (wrapping) when sel = 1. Exhaustive at 5 bits (the 8x8 multiplier's block),
// random at the default 30 bits.
module tb_mbec;
  logic [4:0]  d5, y5;
  logic [29:0] d30, y30;
  logic        sel;
  int checks = 0, failures = 0;

  mbec #(.W(5)) dut5  (.d(d5),  .sel(sel), .y(y5));
  mbec          dut30 (.d(d30), .sel(sel), .y(y30));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      {sel, d5} = 6'(v);
      #1;
      checks++;
      if (y5 !== d5 + 5'(sel)) begin
        failures++;
        $display("FAIL W=5 sel=%0b d=%05b y=%05b", sel, d5, y5);
      end
    end
    for (int v = 0; v < 2000; v++) begin
      sel = v[0];
      d30 = (v < 2) ? '1 : 30'($urandom);
      #1;
      checks++;
      if (y30 !== d30 + 30'(sel)) begin
        failures++;
        $display("FAIL W=30 sel=%0b d=%h y=%h", sel, d30, y30);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
