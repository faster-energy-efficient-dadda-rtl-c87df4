// tb_hybrid_final_adder: checks the final adder at all four layouts
// (N = 8, 16, 32 and the default 64). Each instance must give
// p_hi = (p1 + p0_hi) mod 2^N.
//
// Random p1 values rarely carry through a whole block, so half of the
// vectors force a run of ones at the bottom of p1 of random length; that
// makes the carry reach every block. The testbench counts, per instance and
// per block, how often the block's select (the carry from below) was one
// and zero, and counts a failure for any select never seen in both states.
module tb_hybrid_final_adder;
  int checks = 0, failures = 0;

  logic [63:0] p1_src;
  logic [5:0]  p0_src;

  logic [7:0]  ph8;
  logic [15:0] ph16;
  logic [31:0] ph32;
  logic [63:0] ph64;

  hybrid_final_adder #(.N(8))  dut8  (.p0_hi(p0_src[2:0]), .p1(p1_src[7:0]),  .p_hi(ph8));
  hybrid_final_adder #(.N(16)) dut16 (.p0_hi(p0_src[3:0]), .p1(p1_src[15:0]), .p_hi(ph16));
  hybrid_final_adder #(.N(32)) dut32 (.p0_hi(p0_src[4:0]), .p1(p1_src[31:0]), .p_hi(ph32));
  hybrid_final_adder           dut64 (.p0_hi(p0_src),      .p1(p1_src),        .p_hi(ph64));

  // Select activity: [instance][block] for blocks 0..3 (instance 8 has one).
  int sel_one  [4][4];
  int sel_zero [4][4];
  int nsel     [4] = '{1, 2, 3, 4};

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic count_sel(input int inst, input int k, input logic v);
    if (v) sel_one[inst][k]++;
    else   sel_zero[inst][k]++;
  endtask

  task automatic check(input int n, input logic [63:0] got);
    logic [63:0] mask = (n == 64) ? '1 : (64'd1 << n) - 64'd1;
    logic [63:0] exp  = ((p1_src & mask) + 64'(p0_src & 6'((1 << $clog2(n)) - 1))) & mask;
    checks++;
    if ((got & mask) !== exp) begin
      failures++;
      $display("FAIL N=%0d p1=%h p0_hi=%h got=%h exp=%h", n, p1_src & mask, p0_src, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++)
      for (int k = 0; k < 4; k++) begin
        sel_one[i][k]  = 0;
        sel_zero[i][k] = 0;
      end

    for (int v = 0; v < 20000; v++) begin
      int unsigned run;
      p1_src = {$urandom, $urandom};
      p0_src = 6'($urandom);
      if (v % 2 == 0) begin
        run = $urandom_range(64, 0);
        if (run == 64) p1_src = '1;
        else           p1_src = p1_src | ((64'd1 << run) - 64'd1);
      end
      if (v == 0) begin p1_src = '1; p0_src = '1; end
      #1;
      check(8, 64'(ph8));
      check(16, 64'(ph16));
      check(32, 64'(ph32));
      check(64, ph64);
      count_sel(0, 0, dut8.sel[0]);
      for (int k = 0; k < 2; k++) count_sel(1, k, dut16.sel[k]);
      for (int k = 0; k < 3; k++) count_sel(2, k, dut32.sel[k]);
      for (int k = 0; k < 4; k++) count_sel(3, k, dut64.sel[k]);
    end

    for (int i = 0; i < 4; i++)
      for (int k = 0; k < nsel[i]; k++) begin
        $display("N=%0d block %0d select: one %0d times, zero %0d times",
                 8 << i, k, sel_one[i][k], sel_zero[i][k]);
        checks++;
        if (sel_one[i][k] == 0 || sel_zero[i][k] == 0) begin
          failures++;
          $display("FAIL N=%0d block %0d select never toggled", 8 << i, k);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
