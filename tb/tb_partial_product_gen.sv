// tb_partial_product_gen: drives random and corner operands into an 8-bit
// and a 64-bit AND array and checks every partial product bit against
// a[i] & b[j]. Also checks the flat numbering: flat bit j*N+i is a_i b_j.
module tb_partial_product_gen;
  localparam int unsigned NS = 8;
  localparam int unsigned NL = 64;

  logic [NS-1:0]          a8, b8;
  logic [NS-1:0][NS-1:0]  pp8;
  logic [NL-1:0]          a64, b64;
  logic [NL-1:0][NL-1:0]  pp64;
  int checks = 0, failures = 0;

  partial_product_gen #(.N(NS)) dut8  (.a(a8),  .b(b8),  .pp(pp8));
  partial_product_gen            dut64 (.a(a64), .b(b64), .pp(pp64));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check8();
    logic [NS*NS-1:0] flat = pp8;
    for (int j = 0; j < NS; j++)
      for (int i = 0; i < NS; i++) begin
        checks++;
        if (flat[j*NS+i] !== (a8[i] & b8[j])) begin
          failures++;
          $display("FAIL N=8 a=%h b=%h index %0d", a8, b8, j*NS+i);
        end
      end
  endtask

  task automatic check64();
    int bad = 0;
    for (int j = 0; j < NL; j++)
      for (int i = 0; i < NL; i++)
        if (pp64[j][i] !== (a64[i] & b64[j])) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL N=64 a=%h b=%h: %0d wrong bits", a64, b64, bad);
    end
  endtask

  initial begin
    for (int v = 0; v < 300; v++) begin
      a8  = (v == 0) ? '1 : NS'($urandom);
      b8  = (v == 1) ? '1 : NS'($urandom);
      a64 = (v == 0) ? '1 : {$urandom, $urandom};
      b64 = (v == 2) ? 64'h1 : {$urandom, $urandom};
      #1;
      check8();
      check64();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
