// cll_2: 4-bit carry look-ahead logic (CLL-2 in the adder figure). From the
// generate/propagate pairs of four PFA cells and the group carry-in it forms
// every internal carry and the group carry-out in two gate levels, without a
// ripple through the bits:
//   c1 = g0 | p0 c0
//   c2 = g1 | p1 g0 | p1 p0 c0
//   c3 = g2 | p2 g1 | p2 p1 g0 | p2 p1 p0 c0
//   co = g3 | p3 g2 | p3 p2 g1 | p3 p2 p1 g0 | p3 p2 p1 p0 c0
// The expanded equations are the standard carry look-ahead ones; the figure
// gives the block's name and its g/p/c connections. Purely combinational.
module cll_2 (
  input  logic [3:0] g,
  input  logic [3:0] p,
  input  logic       ci,
  output logic [3:0] c,   // carries into bits 0..3 (c[0] = ci)
  output logic       co   // carry out of the group
);
  always_comb begin
    c[0] = ci;
    c[1] = g[0] | (p[0] & ci);
    c[2] = g[1] | (p[1] & g[0]) | (p[1] & p[0] & ci);
    c[3] = g[2] | (p[2] & g[1]) | (p[2] & p[1] & g[0]) | (p[2] & p[1] & p[0] & ci);
    co   = g[3] | (p[3] & g[2]) | (p[3] & p[2] & g[1]) | (p[3] & p[2] & p[1] & g[0])
         | (p[3] & p[2] & p[1] & p[0] & ci);
  end
endmodule
