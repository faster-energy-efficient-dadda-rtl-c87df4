// tb_dadda_hybrid_mult_full: the multiplier at its default size (64 x 64,
// no parameter override), taken through complete multiplications.
//
// Operands: corners, directed pairs that make the final adder's carry run
// through all its blocks, and random pairs (uniform, many ones, close to
// 2^64 - 1). Each 128-bit product is compared with a * b computed by the
// simulator. The testbench also counts how often part0's carry word was
// non-zero and how often each select of the hybrid final adder was one and
// zero, and fails if any of these never happened. Combinational design: each
// vector is read 1 time unit after it is applied.
module tb_dadda_hybrid_mult_full;
  int checks = 0, failures = 0;

  logic [63:0]  a, b;
  logic [127:0] p;

  dadda_hybrid_mult dut (.a(a), .b(b), .p(p));

  int sel_one [4];
  int sel_zero[4];
  int p0_carry;

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] operand(input int kind);
    logic [63:0] r = {$urandom, $urandom};
    case (kind)
      0:       return r;
      1:       return r | {$urandom, $urandom};
      default: return ~(r >> $urandom_range(63, 40));
    endcase
  endfunction

  initial begin
    p0_carry = 0;
    for (int k = 0; k < 4; k++) begin
      sel_one[k]  = 0;
      sel_zero[k] = 0;
    end

    for (int v = 0; v < 20000; v++) begin
      a = operand(v % 3);
      b = operand(v % 3);
      case (v)
        0: begin a = '1;    b = '1; end
        1: begin a = '0;    b = '1; end
        2: begin a = 64'd1; b = '1; end
        default: ;
      endcase
      // a = 2^64 - (2^34 - 2^20 - d), b = 2^64 - (2^20 + d): the upper half
      // of the product is 2^64 - 2^34, so part1 holds ones in bits 70..97
      // and the carry passes through every MBECWC block.
      if (v >= 3 && v < 11) begin
        a = 64'(-((64'd1 << 34) - (64'd1 << 20) - 64'(v - 3)));
        b = 64'(-((64'd1 << 20) + 64'(v - 3)));
      end
      #1;
      checks++;
      if (p !== 128'(a) * 128'(b)) begin
        failures++;
        if (failures < 10) $display("FAIL %h * %h -> %h", a, b, p);
      end
      if (dut.u_hfa.p0_hi != 0) p0_carry++;
      for (int k = 0; k < 4; k++)
        if (dut.u_hfa.sel[k]) sel_one[k]++;
        else                  sel_zero[k]++;
    end

    $display("part0 carry word non-zero %0d times", p0_carry);
    checks++;
    if (p0_carry == 0) begin
      failures++;
      $display("FAIL part0 never carried into the final adder");
    end
    for (int k = 0; k < 4; k++) begin
      $display("final adder block %0d select one %0d, zero %0d times", k, sel_one[k], sel_zero[k]);
      checks++;
      if (sel_one[k] == 0 || sel_zero[k] == 0) begin
        failures++;
        $display("FAIL block %0d select never toggled", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
