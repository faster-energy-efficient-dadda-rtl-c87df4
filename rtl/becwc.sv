// becwc: W-bit binary to excess-1 converter with carry out.
//
// {cout, x} = b + 1. Same AND chain as bec, extended by one more AND so that
// cout is one exactly when all W input bits are one. The mux of an MBECWC
// block passes cout on as the select of the next block. Combinational.
// Function and port names follow the published design.
module becwc #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] b,
  output logic [W-1:0] x,
  output logic         cout
);
  logic [W:0] t;     // t[i]: b[i-1:0] are all one
  assign t[0] = 1'b1;
  for (genvar i = 1; i <= W; i++) begin : g_chain
    assign t[i] = t[i-1] & b[i-1];
  end
  assign x    = b ^ t[W-1:0];
  assign cout = t[W];
endmodule
