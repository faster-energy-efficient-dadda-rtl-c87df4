// mbec: multiplexer with a binary to excess-1 converter (no carry out).
//
// The block's W product bits are either the incoming bits d as they are
// (sel = 0) or d + 1 from a BEC (sel = 1). sel is the carry from the block
// below, so the increment is ready before the carry arrives and the carry
// only has to drive the 2W:W mux. Combinational. Structure as published
// (mux input 1 = BEC output, input 0 = bits as they are).
module mbec #(
  parameter int unsigned W = 30
) (
  input  logic [W-1:0] d,
  input  logic         sel,
  output logic [W-1:0] y
);
  logic [W-1:0] inc;
  bec #(.W(W)) u_bec (.b(d), .x(inc));
  assign y = sel ? inc : d;
endmodule
