// mcla_4: one 4-bit group of the modified carry look-ahead adder: four PFA
// cells and one CLL-2 carry look-ahead block. The group computes its own
// carries in parallel and hands its carry-out (Co4, Co5, ... in the adder
// figure) to the next group, so carries ripple only from group to group.
// Purely combinational.
module mcla_4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  input  logic       ci,
  output logic [3:0] s,
  output logic       co
);
  logic [3:0] g, p, c;

  for (genvar i = 0; i < 4; i++) begin : g_bit
    pfa u_pfa (.a(a[i]), .b(b[i]), .c(c[i]), .g(g[i]), .p(p[i]), .s(s[i]));
  end

  cll_2 u_cll (.g(g), .p(p), .ci(ci), .c(c), .co(co));
endmodule
