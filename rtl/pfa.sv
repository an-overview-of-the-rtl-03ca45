// pfa: partial full adder, the bit cell of the carry look-ahead adder (Fig. 5
// of the adder structure labels it PFA). It forms the bit's generate g = a&b,
// propagate p = a^b and sum s = p^c from the carry c that the look-ahead logic
// delivers. Purely combinational. The g/p/s equations are the usual textbook
// definition of a PFA; the figure prints only the cell's name and pins.
module pfa (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic g,
  output logic p,
  output logic s
);
  always_comb begin
    g = a & b;
    p = a ^ b;
    s = p ^ c;
  end
endmodule
