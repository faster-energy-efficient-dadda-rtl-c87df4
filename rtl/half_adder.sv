// half_adder: the (2,2) counter of the Dadda trees and of the final carry
// chains. Two bits of one column in, their sum bit (same column) and carry
// bit (next column) out. Combinational. The counter's role follows the
// published design; its two-gate form is the obvious one, since no gate
// level is given there.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,   // sum, weight 1
  output logic c    // carry, weight 2
);
  assign s = a ^ b;
  assign c = a & b;
endmodule
