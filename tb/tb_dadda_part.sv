// tb_dadda_part: checks both partition trees at N = 8, 16 and the default
// 64. The trees are driven with arbitrary partial-product matrices (not only
// those an AND array can produce), so every compressor sees every input
// pattern. The reference is the weighted column count: for each column c of
// the part, the number of ones among the pp bits with i + j = c, times 2^c.
// part0 must return that sum for columns 0..N-1; part1 must return the sum
// for columns N..2N-2, shifted down by N.
module tb_dadda_part;
  int checks = 0, failures = 0;

  logic [7:0][7:0]   pp8;
  logic [15:0][15:0] pp16;
  logic [63:0][63:0] pp64;

  logic [10:0] s8_0;   logic [7:0]  s8_1;
  logic [19:0] s16_0;  logic [15:0] s16_1;
  logic [69:0] s64_0;  logic [63:0] s64_1;

  dadda_part #(.N(8),  .PART(1'b0)) d8_0  (.pp(pp8),  .sum(s8_0));
  dadda_part #(.N(8),  .PART(1'b1)) d8_1  (.pp(pp8),  .sum(s8_1));
  dadda_part #(.N(16), .PART(1'b0)) d16_0 (.pp(pp16), .sum(s16_0));
  dadda_part #(.N(16), .PART(1'b1)) d16_1 (.pp(pp16), .sum(s16_1));
  dadda_part                        d64_0 (.pp(pp64), .sum(s64_0));
  dadda_part #(.N(64), .PART(1'b1)) d64_1 (.pp(pp64), .sum(s64_1));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference sums from a flat pp vector of an n x n matrix (n <= 64).
  function automatic logic [127:0] col_sum(input logic [4095:0] flat, input int n,
                                           input int cfirst, input int clast);
    logic [127:0] acc = '0;
    for (int j = 0; j < n; j++)
      for (int i = 0; i < n; i++)
        if (flat[j*n+i] && (i + j) >= cfirst && (i + j) <= clast)
          acc += 128'd1 << (i + j - cfirst);
    return acc;
  endfunction

  task automatic cmp(input string tag, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", tag, got, exp);
    end
  endtask

  function automatic logic [63:0] rnd64(input int v, input int dens);
    // dens 0: uniform, 1: mostly ones, 2: mostly zeros
    logic [63:0] r = {$urandom, $urandom};
    case (dens)
      1:       return r | {$urandom, $urandom};
      2:       return r & {$urandom, $urandom};
      default: return r;
    endcase
  endfunction

  initial begin
    for (int v = 0; v < 600; v++) begin
      int dens;
      dens = v % 3;
      for (int j = 0; j < 64; j++) pp64[j] = rnd64(v, dens);
      for (int j = 0; j < 16; j++) pp16[j] = 16'(rnd64(v, dens));
      for (int j = 0; j < 8; j++)  pp8[j]  = 8'(rnd64(v, dens));
      if (v == 0) begin pp64 = '1; pp16 = '1; pp8 = '1; end
      if (v == 1) begin pp64 = '0; pp16 = '0; pp8 = '0; end
      #1;
      cmp("N=8 part0",  128'(s8_0),  col_sum(4096'(pp8), 8, 0, 7));
      cmp("N=8 part1",  128'(s8_1),  col_sum(4096'(pp8), 8, 8, 14));
      cmp("N=16 part0", 128'(s16_0), col_sum(4096'(pp16), 16, 0, 15));
      cmp("N=16 part1", 128'(s16_1), col_sum(4096'(pp16), 16, 16, 30));
      cmp("N=64 part0", 128'(s64_0), col_sum(4096'(pp64), 64, 0, 63));
      cmp("N=64 part1", 128'(s64_1), col_sum(4096'(pp64), 64, 64, 126));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
