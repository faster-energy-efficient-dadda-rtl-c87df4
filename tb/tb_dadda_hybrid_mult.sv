// tb_dadda_hybrid_mult: end-to-end test of the multiplier at N = 8, 16, 32
// and at its default N = 64 (the last instance has no parameter override).
//
// N = 8 is tested exhaustively (all 65536 operand pairs). The wider ones get
// random operands of three kinds: uniform, with many ones, and close to
// 2^N - 1, plus directed operands that make the final adder's carry run
// through its 4- and 8-bit blocks at N = 64. Each product is compared with a * b computed by the simulator.
//
// Mechanisms counted per instance, each of which must occur:
//   - part0 pushing a non-zero carry word p0[N+L-1:N] into the final adder;
//   - every block select of the hybrid final adder seen both one and zero
//     (the ripple adder's carry out, and each MBECWC block's carry out).
// The design is combinational; each vector is applied and read 1 time unit
// later.
module tb_dadda_hybrid_mult;
  int checks = 0, failures = 0;

  logic [7:0]   a8,  b8;   logic [15:0]  p8;
  logic [15:0]  a16, b16;  logic [31:0]  p16;
  logic [31:0]  a32, b32;  logic [63:0]  p32;
  logic [63:0]  a64, b64;  logic [127:0] p64;

  dadda_hybrid_mult #(.N(8))  dut8  (.a(a8),  .b(b8),  .p(p8));
  dadda_hybrid_mult #(.N(16)) dut16 (.a(a16), .b(b16), .p(p16));
  dadda_hybrid_mult #(.N(32)) dut32 (.a(a32), .b(b32), .p(p32));
  dadda_hybrid_mult           dut64 (.a(a64), .b(b64), .p(p64));

  int sel_one  [4][4];
  int sel_zero [4][4];
  int p0_carry [4];
  int nsel     [4] = '{1, 2, 3, 4};

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic note_sel(input int inst, input int k, input logic v);
    if (v) sel_one[inst][k]++;
    else   sel_zero[inst][k]++;
  endtask

  function automatic logic [63:0] operand(input int kind);
    logic [63:0] r = {$urandom, $urandom};
    case (kind)
      0:       return r;
      1:       return r | {$urandom, $urandom};
      default: return ~(r >> $urandom_range(63, 40));
    endcase
  endfunction

  task automatic sample();
    if (dut8.u_hfa.p0_hi  != 0) p0_carry[0]++;
    if (dut16.u_hfa.p0_hi != 0) p0_carry[1]++;
    if (dut32.u_hfa.p0_hi != 0) p0_carry[2]++;
    if (dut64.u_hfa.p0_hi != 0) p0_carry[3]++;
    note_sel(0, 0, dut8.u_hfa.sel[0]);
    for (int k = 0; k < 2; k++) note_sel(1, k, dut16.u_hfa.sel[k]);
    for (int k = 0; k < 3; k++) note_sel(2, k, dut32.u_hfa.sel[k]);
    for (int k = 0; k < 4; k++) note_sel(3, k, dut64.u_hfa.sel[k]);
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      p0_carry[i] = 0;
      for (int k = 0; k < 4; k++) begin
        sel_one[i][k]  = 0;
        sel_zero[i][k] = 0;
      end
    end
    a16 = '0; b16 = '0; a32 = '0; b32 = '0; a64 = '0; b64 = '0;

    // N = 8: every operand pair.
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++) begin
        a8 = 8'(x);
        b8 = 8'(y);
        #1;
        checks++;
        if (p8 !== 16'(x * y)) begin
          failures++;
          if (failures < 10) $display("FAIL N=8 %0d * %0d -> %0d", x, y, p8);
        end
        sample();
      end

    // Wider sizes: random operands of three kinds, plus corners.
    for (int v = 0; v < 30000; v++) begin
      logic [63:0] x, y;
      x = operand(v % 3);
      y = operand(v % 3);
      if (v == 0) begin x = '1; y = '1; end
      if (v == 1) begin x = '0; y = '1; end
      if (v == 2) begin x = 64'd1; y = '1; end
      // x = 2^64 - (2^34 - 2^20 - d), y = 2^64 - (2^20 + d): the upper
      // product half is 2^64 - 2^34, whose bits 64..97 are zero. part0's
      // carry word is non-zero, so part1's bits 70..97 are all ones and the
      // carry runs through the 4-, 8- and 16-bit blocks into the top one.
      if (v >= 3 && v < 11) begin
        x = 64'(-((64'd1 << 34) - (64'd1 << 20) - 64'(v - 3)));
        y = 64'(-((64'd1 << 20) + 64'(v - 3)));
      end
      a16 = x[15:0]; b16 = y[15:0];
      a32 = x[31:0]; b32 = y[31:0];
      a64 = x;       b64 = y;
      #1;
      checks += 3;
      if (p16 !== 32'(a16) * 32'(b16)) begin
        failures++;
        if (failures < 10) $display("FAIL N=16 %h * %h -> %h", a16, b16, p16);
      end
      if (p32 !== 64'(a32) * 64'(b32)) begin
        failures++;
        if (failures < 10) $display("FAIL N=32 %h * %h -> %h", a32, b32, p32);
      end
      if (p64 !== 128'(a64) * 128'(b64)) begin
        failures++;
        if (failures < 10) $display("FAIL N=64 %h * %h -> %h", a64, b64, p64);
      end
      sample();
    end

    for (int i = 0; i < 4; i++) begin
      $display("N=%0d: part0 carry word non-zero %0d times", 8 << i, p0_carry[i]);
      checks++;
      if (p0_carry[i] == 0) begin
        failures++;
        $display("FAIL N=%0d part0 never carried into the final adder", 8 << i);
      end
      for (int k = 0; k < nsel[i]; k++) begin
        $display("N=%0d: final adder block %0d select one %0d, zero %0d times",
                 8 << i, k, sel_one[i][k], sel_zero[i][k]);
        checks++;
        if (sel_one[i][k] == 0 || sel_zero[i][k] == 0) begin
          failures++;
          $display("FAIL N=%0d block %0d select never toggled", 8 << i, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
