// spfa: simplified partial full adder for the most significant bit of the
// modified carry look-ahead adder (SPFA in the adder figure). Only the sum
// s = a ^ b ^ c is formed; the MSB has no further carry to look ahead for, so
// the carry out of a modular (wrap-around) CIC adder is not needed.
// Purely combinational.
module spfa (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic s
);
  always_comb s = a ^ b ^ c;
endmodule
