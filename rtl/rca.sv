// rca: W-bit ripple carry adder without carry input.
//
// Bit 0 is a half adder, bits 1..W-1 are full adders, each passing its carry
// to the next. co is the carry out of the top bit. In the hybrid final adder
// it adds the log2(N) excess bits of part0 to the low bits of part1, and co
// selects the first multiplexer above it. Combinational.
// The published text calls this adder a CLA in places, but its drawings
// label it RCA; a ripple adder is used, as drawn.
module rca #(
  parameter int unsigned W = 6
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s,
  output logic         co
);
  logic [W:0] c;
  assign c[0] = 1'b0;

  half_adder u_ha (.a(a[0]), .b(b[0]), .s(s[0]), .c(c[1]));
  for (genvar i = 1; i < W; i++) begin : g_bit
    full_adder u_fa (.a(a[i]), .b(b[i]), .ci(c[i]), .s(s[i]), .c(c[i+1]));
  end
  assign co = c[W];
endmodule
