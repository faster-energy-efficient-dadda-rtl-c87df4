// dadda_hybrid_mult: N x N unsigned multiplier built from a partitioned
// Dadda tree and a hybrid (ripple carry + carry-select-by-increment) final
// adder.
//
// Data path, all combinational (result valid one propagation delay after the
// operands change; there is no clock):
//   1. partial_product_gen forms the N*N products a[i] & b[j].
//   2. Two independent Dadda trees reduce them: part0 over columns 0..N-1,
//      part1 over columns N..2N-2. part0 yields p0[N+L-1:0] (L = log2 N),
//      part1 yields p1[2N-1:N].
//   3. p[N-1:0] = p0[N-1:0] directly. hybrid_final_adder adds p0[N+L-1:N] to
//      p1 to give p[2N-1:N].
// Interface: a, b in; p = a * b out (2N bits), unsigned.
// The default N = 64 is the largest size evaluated for this architecture;
// 8, 16 and 32 are the other evaluated sizes. The lack of registers is this
// design's choice: the architecture is specified and measured as a purely
// combinational multiplier.
module dadda_hybrid_mult
  import dadda_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  localparam int unsigned L = hyb_rca_width(N);

  logic [N-1:0][N-1:0] pp;
  logic [N+L-1:0]      p0;
  logic [N-1:0]        p1;

  partial_product_gen #(.N(N)) u_ppg (.a(a), .b(b), .pp(pp));

  dadda_part #(.N(N), .PART(1'b0)) u_part0 (.pp(pp), .sum(p0));
  dadda_part #(.N(N), .PART(1'b1)) u_part1 (.pp(pp), .sum(p1));

  hybrid_final_adder #(.N(N)) u_hfa (.p0_hi(p0[N+L-1:N]), .p1(p1), .p_hi(p[2*N-1:N]));

  assign p[N-1:0] = p0[N-1:0];
endmodule
