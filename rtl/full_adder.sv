// full_adder: the (3,2) counter of the Dadda trees and of the ripple carry
// chains. Three bits of one column in, their sum bit (same column) and carry
// bit (next column) out. Combinational. Role as in the published design;
// the parity/majority equations are this implementation's choice.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,   // sum, weight 1
  output logic c    // carry, weight 2
);
  assign s = a ^ b ^ ci;
  assign c = (a & b) | (a & ci) | (b & ci);
endmodule
