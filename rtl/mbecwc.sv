// mbecwc: multiplexer with a binary to excess-1 converter with carry.
//
// A (2W+2):(W+1) mux chooses between {1'b0, d} (sel = 0) and the W+1 bit
// BECWC output {cout, d + 1} (sel = 1). The low W bits are the block's
// product bits; the MSB is the carry out that selects the next block.
// Combinational. Structure as published, including the zero appended on
// the sel = 0 side to match widths.
module mbecwc #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] d,
  input  logic         sel,
  output logic [W-1:0] y,
  output logic         cout
);
  logic [W-1:0] inc;
  logic         inc_c;
  becwc #(.W(W)) u_becwc (.b(d), .x(inc), .cout(inc_c));
  assign {cout, y} = sel ? {inc_c, inc} : {1'b0, d};
endmodule
