// partial_product_gen: the AND array that forms all N*N partial products of
// two unsigned N-bit operands at once.
//
// pp[j][i] = a[i] & b[j]. Read as one flat vector, pp[j*N + i] is the
// partial product numbered j*N+i (a0b0 = 0, a1b0 = 1, ...), the numbering
// the column trees use. It has weight 2^(i+j). Combinational, no clock.
// The AND array and the numbering follow the published design. Although the
// design is titled after Baugh-Wooley, it describes plain AND-gate partial
// products with no inverted terms or correction constants, so operands are
// unsigned here.
module partial_product_gen #(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0]        a,
  input  logic [N-1:0]        b,
  output logic [N-1:0][N-1:0] pp
);
  for (genvar j = 0; j < N; j++) begin : g_row
    assign pp[j] = a & {N{b[j]}};
  end
endmodule
