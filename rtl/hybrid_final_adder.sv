// hybrid_final_adder: adds the two partial results of the partitioned
// multiplier to give the upper half of the product, p[2N-1:N].
//
// Inputs are p1 = p1[2N-1:N], the one-row result of the part1 tree, and
// p0_hi = p0[N+L-1:N] (L = log2 N), the carry bits part0 pushes above bit N.
// Only the lowest L bits of p1 meet p0 bits, so they alone go through an
// L-bit ripple carry adder. All higher bits of p1 only need +1 when a carry
// arrives. They are cut into blocks of 4, 8, 16, ... bits; each block is an
// MBECWC (mux between the bits as they are and the bits + 1, with a carry
// out) and the last, taking the remaining bits, is an MBEC (no carry out).
// Each block's select is the carry of the block below, so the increments are
// computed in parallel with the ripple adder and the carry only passes one
// mux per block. For N = 8, 16, 32, 64 this gives the layouts 3+5, 4+4+8,
// 5+4+8+15 and 6+4+8+16+30; the rule in dadda_pkg generalises them.
// The carry out of the top block is dropped: the product fits in 2N bits.
// Combinational. The four layouts are the published ones; the rule that
// produces them for any N is this design's own.
module hybrid_final_adder
  import dadda_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic [hyb_rca_width(N)-1:0] p0_hi,
  input  logic [N-1:0]                p1,
  output logic [N-1:0]                p_hi
);
  localparam int unsigned L  = hyb_rca_width(N);
  localparam int unsigned NB = hyb_num_becwc(N);

  // sel[k] selects block k; sel[0] is the ripple adder's carry.
  logic [NB:0] sel;

  rca #(.W(L)) u_rca (.a(p1[L-1:0]), .b(p0_hi), .s(p_hi[L-1:0]), .co(sel[0]));

  for (genvar k = 0; k < NB; k++) begin : g_mbecwc
    localparam int unsigned LSB = hyb_block_lsb(N, k);
    localparam int unsigned SZ  = hyb_block_size(N, k);
    mbecwc #(.W(SZ)) u_blk (
      .d(p1[LSB +: SZ]), .sel(sel[k]), .y(p_hi[LSB +: SZ]), .cout(sel[k+1])
    );
  end

  localparam int unsigned TOP_LSB = hyb_block_lsb(N, NB);
  localparam int unsigned TOP_SZ  = hyb_block_size(N, NB);
  mbec #(.W(TOP_SZ)) u_top (
    .d(p1[TOP_LSB +: TOP_SZ]), .sel(sel[NB]), .y(p_hi[TOP_LSB +: TOP_SZ])
  );
endmodule
