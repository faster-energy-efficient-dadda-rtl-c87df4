// bec: W-bit binary to excess-1 converter without carry out.
//
// x = b + 1 modulo 2^W. x[0] is the inverse of b[0]; x[i] is b[i] flipped
// when all lower bits are one, that condition being formed by a chain of
// two-input ANDs (t[i] = t[i-1] & b[i-1]). It serves as the top block of the
// hybrid final adder, whose carry out is never needed. Combinational.
// The function (table of b -> b + 1) follows the published design; the gate
// chain is the simplest form of it.
module bec #(
  parameter int unsigned W = 5
) (
  input  logic [W-1:0] b,
  output logic [W-1:0] x
);
  logic [W-1:0] t;   // t[i]: b[i-1:0] are all one
  assign t[0] = 1'b1;
  for (genvar i = 1; i < W; i++) begin : g_chain
    assign t[i] = t[i-1] & b[i-1];
  end
  assign x = b ^ t;
endmodule
